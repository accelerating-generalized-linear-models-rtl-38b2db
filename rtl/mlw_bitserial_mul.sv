// mlw_bitserial_mul: LANES bit-serial multipliers working in lock step.
//
// Each lane multiplies a full-precision operand x by a quantized value a that
// arrives most significant bit first, one bit per cycle. With a read as the
// fraction sum_i a[i]*2^-i, the product is sum_i a[i]*(x >>> i): the first bit
// loads the accumulator, each later bit adds the operand shifted by its weight
// (shift-and-add only, no multiplier). After s bits the products are complete,
// so precision is chosen at run time simply by how many bits are streamed in.
//
// Interface: en presents one bit plane (bits[j] for lane j) with its weight
// index shamt (1 for the MSB). first restarts the accumulators, last marks
// bit s. prod_valid pulses one cycle after the last bit, while prod holds the
// products; prod is overwritten on the next enabled cycle.
// Arithmetic is 32-bit two's complement with wrap-around. The shift-and-add
// form follows the published design; the wrap behaviour is this design's.
module mlw_bitserial_mul
  import mlw_pkg::*;
#(
  parameter int unsigned LANES_P = LANES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  first,
  input  logic                  last,
  input  prec_t                 shamt,
  input  logic [LANES_P-1:0]    bits,
  input  word_t [LANES_P-1:0]   opnd,
  output logic                  prod_valid,
  output word_t [LANES_P-1:0]   prod
);

  word_t [LANES_P-1:0] acc;

  always_ff @(posedge clk) begin
    if (en) begin
      for (int j = 0; j < LANES_P; j++) begin
        acc[j] <= (first ? word_t'(0) : acc[j]) + (bits[j] ? (opnd[j] >>> shamt) : word_t'(0));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) prod_valid <= 1'b0;
    else        prod_valid <= en && last;
  end

  assign prod = acc;

endmodule
