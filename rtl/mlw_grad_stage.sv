// mlw_grad_stage: gradient computation and accumulation for a group.
//
// Once the serial part has produced the 8 scale values of a group, this stage
// replays the group's bit-plane lines from the sample FIFO in the order they
// arrived, one line per cycle. Bank k runs 64 bit-serial multipliers with its
// scale broadcast as the parallel operand, so after the s bit planes of a
// chunk it holds scale_k * Q_s(a_k) for 64 features. The 64 element-wise
// adder trees then add the 8 banks, and the summed chunk leaves with its chunk
// index. It also counts groups within the mini-batch and marks the last one
// (g_commit): that group's update is what the architectural model receives.
//
// Timing: a group takes C*s cycles (C = ceil(M/64) chunks) and the next group
// follows without a gap when its scales are already queued; each chunk's sum leaves 4 cycles after its last bit (1 for
// the multipliers, 3 for the trees), i.e. one chunk every s cycles.
// Interface: scales are taken from a queue (scale_valid / scale_pop), lines
// from the sample FIFO (line_avail / line_pop, first-word fall-through).
// prec, chunks and grp_per_batch must stay constant while a group runs; init
// clears the group count at the start of an epoch.
module mlw_grad_stage
  import mlw_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   init,
  input  prec_t                  prec,
  input  logic [CHUNK_W:0]       chunks,
  input  logic [CNT_W-1:0]       grp_per_batch,
  input  logic                   scale_valid,
  input  bank_vec_t              scale,
  output logic                   scale_pop,
  input  logic                   line_avail,
  input  line_t                  line,
  output logic                   line_pop,
  output logic                   g_valid,
  output chunk_t                 g_sum,
  output chunk_idx_t             g_chunk,
  output logic                   g_last_chunk,
  output logic                   g_commit,
  output logic                   busy
);

  localparam int unsigned ACC_LAT = $clog2(BANKS);

  typedef struct packed {
    chunk_idx_t chunk;
    logic       last_chunk;
    logic       commit;
  } tag_t;

  logic             active;
  bank_vec_t        scale_q;
  prec_t            bit_i;
  chunk_idx_t       chunk_i;
  logic [CNT_W-1:0] grp_i;
  logic             en;
  logic             last_b, last_c, last_g;

  assign last_b    = (bit_i == prec - 1'b1);
  assign last_c    = (CHUNK_W+1)'(chunk_i) == chunks - 1'b1;
  assign last_g    = (grp_i == grp_per_batch - 1'b1);
  logic group_end;
  assign group_end = en && last_b && last_c;
  assign scale_pop = scale_valid && !init && (!active || group_end);
  assign en        = active && line_avail;
  assign line_pop  = en;
  assign busy      = active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active  <= 1'b0;
      bit_i   <= '0;
      chunk_i <= '0;
      grp_i   <= '0;
      scale_q <= '0;
    end else if (init) begin
      active  <= 1'b0;
      bit_i   <= '0;
      chunk_i <= '0;
      grp_i   <= '0;
    end else begin
      if (en) begin
        if (!last_b) begin
          bit_i <= bit_i + 1'b1;
        end else begin
          bit_i <= '0;
          if (!last_c) begin
            chunk_i <= chunk_i + 1'b1;
          end else begin
            chunk_i <= '0;
            active  <= 1'b0;
            grp_i   <= last_g ? '0 : grp_i + 1'b1;
          end
        end
      end
      if (scale_pop) begin   // next group follows without a gap
        active  <= 1'b1;
        scale_q <= scale;
        bit_i   <= '0;
        chunk_i <= '0;
      end
    end
  end

  // 8 banks of 64 bit-serial multipliers with the bank's scale broadcast
  logic [BANKS-1:0]   pv;
  chunk_t [BANKS-1:0] prods;

  for (genvar k = 0; k < int'(BANKS); k++) begin : g_bank
    chunk_t opnd;
    always_comb
      for (int j = 0; j < int'(LANES); j++) opnd[j] = scale_q[k];
    mlw_bitserial_mul #(.LANES_P(LANES)) u_mul (
      .clk, .rst_n,
      .en    (en),
      .first (bit_i == '0),
      .last  (last_b),
      .shamt (bit_i + 1'b1),
      .bits  (line[k*LANES +: LANES]),
      .opnd  (opnd),
      .prod_valid(pv[k]),
      .prod  (prods[k])
    );
  end

  mlw_grad_accum u_accum (
    .clk, .rst_n,
    .in_valid (pv[0]),
    .grad     (prods),
    .out_valid(g_valid),
    .sum      (g_sum)
  );

  // chunk tag travels with the products through the trees
  tag_t tag_mul;
  tag_t tag_pipe [ACC_LAT];

  always_ff @(posedge clk) begin
    if (en && last_b) tag_mul <= '{chunk: chunk_i, last_chunk: last_c, commit: last_g};
    tag_pipe[0] <= tag_mul;
    for (int d = 1; d < int'(ACC_LAT); d++) tag_pipe[d] <= tag_pipe[d-1];
  end

  assign g_chunk      = tag_pipe[ACC_LAT-1].chunk;
  assign g_last_chunk = tag_pipe[ACC_LAT-1].last_chunk;
  assign g_commit     = tag_pipe[ACC_LAT-1].commit;

  // the eight multiplier banks run in lock step
  a_banks_in_step: assert property (@(posedge clk) disable iff (!rst_n) pv == {BANKS{pv[0]}});

endmodule
