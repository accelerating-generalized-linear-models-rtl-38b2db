// mlw_model_update: applies gradient chunks to the working and architectural models.
//
// The working model x_w absorbs the summed gradient of every group of 8
// samples: x_w[c] <= x_w[c] - g[c], 64 values per write. The architectural
// model x, which the dot product reads, changes only once per mini-batch: the
// last group of the batch (g_commit) writes its result into x as well. Since
// x_w equals x at every batch start, the batch thus sees one consistent model
// and the mini-batch semantics are kept. The first and last chunk writes of
// such a commit are reported; the hazard controller turns them into read
// credits for the next mini-batch.
//
// Timing: two stages. Stage A issues the x_w read of the arriving chunk;
// stage B, one cycle later, subtracts and writes x_w (and x on a commit). When
// the model has a single chunk, two groups may update the same word in
// consecutive cycles; a one-entry forwarding register then supplies the value
// still being written (bypass_hit pulses). xw_raddr is the arriving chunk
// index itself: the memory registers the read, so no extra stage is spent. The read-modify-write structure and
// forwarding are this design's; what is updated and when follows the
// published design.
module mlw_model_update
  import mlw_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       g_valid,
  input  chunk_t     g_sum,
  input  chunk_idx_t g_chunk,
  input  logic       g_last_chunk,
  input  logic       g_commit,
  // working model
  output chunk_idx_t xw_raddr,
  input  chunk_t     xw_rdata,
  output logic       xw_we,
  output chunk_idx_t xw_waddr,
  output chunk_t     xw_wdata,
  // architectural model
  output logic       x_we,
  output chunk_idx_t x_waddr,
  output chunk_t     x_wdata,
  // events
  output logic       commit_first,
  output logic       commit_last,
  output logic       group_done,
  output logic       bypass_hit
);

  logic       b_valid, b_last, b_commit;
  chunk_idx_t b_chunk;
  chunk_t     b_sum;
  logic       fwd_valid;
  chunk_idx_t fwd_addr;
  chunk_t     fwd_data;
  chunk_t     old_val, new_val;

  assign xw_raddr = g_chunk;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_valid   <= 1'b0;
      fwd_valid <= 1'b0;
    end else begin
      b_valid   <= g_valid;
      fwd_valid <= b_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (g_valid) begin
      b_sum    <= g_sum;
      b_chunk  <= g_chunk;
      b_last   <= g_last_chunk;
      b_commit <= g_commit;
    end
    if (b_valid) begin
      fwd_addr <= b_chunk;
      fwd_data <= new_val;
    end
  end

  assign bypass_hit = b_valid && fwd_valid && (fwd_addr == b_chunk);
  assign old_val    = bypass_hit ? fwd_data : xw_rdata;

  always_comb
    for (int j = 0; j < int'(LANES); j++) new_val[j] = old_val[j] - b_sum[j];

  assign xw_we        = b_valid;
  assign xw_waddr     = b_chunk;
  assign xw_wdata     = new_val;
  assign x_we         = b_valid && b_commit;
  assign x_waddr      = b_chunk;
  assign x_wdata      = new_val;
  assign commit_first = x_we && (b_chunk == '0);
  assign commit_last  = x_we && b_last;
  assign group_done   = b_valid && b_last;

endmodule
