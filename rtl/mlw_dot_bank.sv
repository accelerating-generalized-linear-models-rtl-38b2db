// mlw_dot_bank: dot product Q_s(a) . x of one bank.
//
// A bank sees 64 features of one sample per cache line, one bit plane at a
// time. 64 bit-serial multipliers combine the bit plane with the 64 model
// values of the current chunk; after s bit planes the 64 products enter a
// six-level pipelined adder tree, and an accumulator adds the tree outputs of
// the ceil(M/64) chunks of the sample. The chunk marked last_chunk closes the
// sum and dot_valid pulses with the result.
//
// Timing: a chunk's products are ready one cycle after its last bit, the
// tree adds 6 cycles and the accumulator 1, so dot_valid follows the last bit
// of the last chunk by 8 cycles. A new bit plane may enter every cycle.
// The structure (multipliers, tree, accumulator) follows the published
// design; the 32-bit wrap-around and pipeline registers are this design's.
module mlw_dot_bank
  import mlw_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              first_bit,
  input  logic              last_bit,
  input  logic              last_chunk,
  input  prec_t             shamt,
  input  logic [LANES-1:0]  bits,
  input  chunk_t            model,
  output logic              dot_valid,
  output word_t             dot
);

  localparam int unsigned TREE_LAT = $clog2(LANES);

  logic   prod_valid;
  chunk_t prod;
  logic   tree_valid;
  word_t  tree_sum;
  logic   prod_last_chunk;
  logic [TREE_LAT-1:0] last_chunk_pipe;
  word_t  acc;

  mlw_bitserial_mul #(.LANES_P(LANES)) u_mul (
    .clk, .rst_n,
    .en    (in_valid),
    .first (first_bit),
    .last  (last_bit),
    .shamt,
    .bits,
    .opnd  (model),
    .prod_valid,
    .prod
  );

  mlw_adder_tree #(.N(LANES), .W(W)) u_tree (
    .clk, .rst_n,
    .in_valid (prod_valid),
    .in_data  (prod),
    .out_valid(tree_valid),
    .out_sum  (tree_sum)
  );

  // carry the last-chunk flag alongside the products and the tree
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prod_last_chunk <= 1'b0;
      last_chunk_pipe <= '0;
    end else begin
      if (in_valid && last_bit) prod_last_chunk <= last_chunk;
      last_chunk_pipe <= {last_chunk_pipe[TREE_LAT-2:0], prod_valid && prod_last_chunk};
    end
  end

  // accumulate chunk sums into the sample's dot product
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      dot_valid <= 1'b0;
      dot       <= '0;
    end else begin
      dot_valid <= 1'b0;
      if (tree_valid) begin
        if (last_chunk_pipe[TREE_LAT-1]) begin
          dot       <= acc + word_t'(tree_sum);
          dot_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= acc + word_t'(tree_sum);
        end
      end
    end
  end

endmodule
