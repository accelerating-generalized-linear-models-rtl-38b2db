// mlw_grad_accum: gradient accumulation across the 8 banks.
//
// For each of the 64 features of a chunk, one 8-input adder tree adds the
// gradient elements the 8 banks computed for their samples, so one summed
// 64-element gradient chunk (2048 bits) leaves per input set. These are the
// 64 element-wise adder trees of the published design; here they are
// pipelined (3 levels), so sum follows in_valid by 3 cycles with out_valid.
// The 1/B of the mini-batch average is applied earlier, in the scale.
module mlw_grad_accum
  import mlw_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  chunk_t [BANKS-1:0]     grad,
  output logic                   out_valid,
  output chunk_t                 sum
);

  logic [LANES-1:0] vld;

  for (genvar j = 0; j < int'(LANES); j++) begin : g_elem
    logic [BANKS-1:0][W-1:0] col;
    always_comb
      for (int k = 0; k < int'(BANKS); k++) col[k] = grad[k][j];
    mlw_adder_tree #(.N(BANKS), .W(W)) u_tree (
      .clk, .rst_n,
      .in_valid (in_valid),
      .in_data  (col),
      .out_valid(vld[j]),
      .out_sum  (sum[j])
    );
  end

  assign out_valid = vld[0];

  // the 64 element trees run in lock step
  a_trees_in_step: assert property (@(posedge clk) disable iff (!rst_n) vld == {LANES{vld[0]}});

endmodule
