// mlw_hazard_ctrl: keeps synchronous SGD synchronous (read-after-write on x).
//
// The dot product of mini-batch n+1 must read the model already updated by
// mini-batch n. Two 16-bit counters track this. wr_counter starts at B (credit
// for the first batch) and grows by B whenever the architectural model x has
// received a batch's update; rd_counter starts at 0 and grows by 8 whenever a
// group of 8 samples starts reading x, which is only allowed while
// rd_counter != wr_counter (rd_grant).
//
// Without chaining a batch's update counts once its last chunk is written, so
// the next batch waits for the whole update. With chaining it counts as soon as
// the first 64-value chunk is written: x is then treated like a vector
// register whose later elements are still being written while the next batch
// already reads the first ones. Because the update writes one chunk every s
// cycles, no slower than the dot product reads one, the reader stays behind
// the writer. This module adds a chunk-level guard that enforces it anyway:
// while a commit is in flight, chunk c may be read only after it is written
// (chunk_ok). In normal operation the guard never has to act.
//
// Interface: init loads the counters (start of an epoch, pipeline empty).
// rd_take steps rd_counter (must only be asserted with rd_grant). x_we /
// x_waddr are the architectural-model writes, commit_first / commit_last
// mark the first and last chunk of a batch commit. Counters and step sizes
// are the published mechanism; the guard is this design's addition.
module mlw_hazard_ctrl
  import mlw_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic [CNT_W-1:0] batch,
  input  logic             chaining,
  output logic             rd_grant,
  input  logic             rd_take,
  input  chunk_idx_t       rd_chunk,
  output logic             chunk_ok,
  input  logic             x_we,
  input  chunk_idx_t       x_waddr,
  input  logic             commit_first,
  input  logic             commit_last,
  output logic [CNT_W-1:0] rd_counter,
  output logic [CNT_W-1:0] wr_counter
);

  logic                upd_pending;   // a commit to x is part-way through
  logic [CHUNK_W:0]    upd_ptr;       // chunks of x already written by it

  assign rd_grant = (rd_counter != wr_counter);
  assign chunk_ok = !upd_pending || ((CHUNK_W+1)'(rd_chunk) < upd_ptr);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_counter  <= '0;
      wr_counter  <= '0;
      upd_pending <= 1'b0;
      upd_ptr     <= '0;
    end else if (init) begin
      rd_counter  <= '0;
      wr_counter  <= batch;
      upd_pending <= 1'b0;
      upd_ptr     <= '0;
    end else begin
      if (rd_take) rd_counter <= rd_counter + CNT_W'(BANKS);
      if ((chaining && commit_first) || (!chaining && commit_last))
        wr_counter <= wr_counter + batch;
      if (commit_first) upd_pending <= !commit_last;
      else if (commit_last) upd_pending <= 1'b0;
      if (x_we) upd_ptr <= (CHUNK_W+1)'(x_waddr) + 1'b1;
    end
  end

  a_take_needs_grant: assert property (@(posedge clk) disable iff (!rst_n) rd_take |-> rd_grant);

endmodule
