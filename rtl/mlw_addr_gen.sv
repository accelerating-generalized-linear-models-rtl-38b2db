// mlw_addr_gen: cache-line addresses of one epoch in the MLWeaving layout.
//
// The dataset is stored transposed: for each group of 8 samples and each
// chunk of 64 features there are 32 consecutive cache lines, line w holding
// bit w (w = 0 is the most significant) of those 64 features of all 8
// samples, bank k in bits [64k+63:64k]. Training at precision s therefore reads
// the first s lines of every block of 32 and skips the rest:
//   addr = base + (g*C + c)*32 + w,  g < N/8, c < C = ceil(M/64), w < s.
// Lower precision means proportionally fewer lines fetched.
//
// Interface: start (while idle) latches base, groups, chunks and prec and
// begins; one address is offered per cycle on req_valid/req_addr and advances
// when req_ready is high. busy stays high until the last address is taken.
// The layout and access pattern are the published ones; addresses counted in
// cache lines and the valid/ready request handshake are this design's.
module mlw_addr_gen
  import mlw_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       groups,
  input  logic [CHUNK_W:0]  chunks,
  input  prec_t             prec,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  output logic              busy
);

  logic [ADDR_W-1:0] blk_addr;     // base + (g*C + c)*32
  logic [31:0]       g_left;
  logic [CHUNK_W:0]  c_i;
  prec_t             w_i;
  logic [CHUNK_W:0]  chunks_q;
  prec_t             prec_q;

  assign req_valid = busy;
  assign req_addr  = blk_addr + ADDR_W'(w_i);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      blk_addr <= '0;
      g_left   <= '0;
      c_i      <= '0;
      w_i      <= '0;
      chunks_q <= '0;
      prec_q   <= '0;
    end else if (!busy) begin
      if (start && groups != 0 && chunks != 0 && prec != 0) begin
        busy     <= 1'b1;
        blk_addr <= base;
        g_left   <= groups;
        c_i      <= '0;
        w_i      <= '0;
        chunks_q <= chunks;
        prec_q   <= prec;
      end
    end else if (req_ready) begin
      if (w_i != prec_q - 1'b1) begin
        w_i <= w_i + 1'b1;
      end else begin
        w_i      <= '0;
        blk_addr <= blk_addr + ADDR_W'(S_MAX);
        if (c_i != chunks_q - 1'b1) begin
          c_i <= c_i + 1'b1;
        end else begin
          c_i    <= '0;
          g_left <= g_left - 1'b1;
          if (g_left == 32'd1) busy <= 1'b0;
        end
      end
    end
  end

endmodule
