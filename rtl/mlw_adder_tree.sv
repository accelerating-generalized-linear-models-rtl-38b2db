// mlw_adder_tree: fully pipelined binary adder tree.
//
// Sums N addends of W bits. Each tree level is one register stage, so the sum
// of inputs presented with in_valid appears LAT = ceil(log2 N) cycles later
// with out_valid; a new set can enter every cycle. N need not be a power of
// two: missing leaves are zero. Sums wrap at W bits.
// The engine uses it to reduce the 64 bit-serial products of a bank (depth 6)
// and, 64 times side by side, to add the 8 banks' gradients element-wise
// (depth 3). One register per level is this design's choice.
module mlw_adder_tree #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][W-1:0] in_data,
  output logic                out_valid,
  output logic [W-1:0]        out_sum
);

  localparam int unsigned LAT = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned P   = 1 << LAT;   // leaves, padded to a power of two

  // level l holds P >> l partial sums; level 0 is the (combinational) input
  logic [P-1:0][W-1:0] lvl [LAT+1];
  logic [LAT:0]        vld;

  always_comb begin
    lvl[0] = '0;
    for (int i = 0; i < int'(N); i++) lvl[0][i] = in_data[i];
  end
  assign vld[0] = in_valid;

  for (genvar l = 1; l <= LAT; l++) begin : g_level
    always_ff @(posedge clk) begin
      for (int i = 0; i < int'(P >> l); i++)
        lvl[l][i] <= lvl[l-1][2*i] + lvl[l-1][2*i+1];
      for (int i = int'(P >> l); i < int'(P); i++)
        lvl[l][i] <= '0;
    end
    always_ff @(posedge clk) begin
      if (!rst_n) vld[l] <= 1'b0;
      else        vld[l] <= vld[l-1];
    end
  end

  assign out_valid = vld[LAT];
  assign out_sum   = lvl[LAT][0];

endmodule
