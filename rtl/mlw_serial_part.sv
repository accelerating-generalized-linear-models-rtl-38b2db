// mlw_serial_part: scale = lambda * df(a.x, b) for the 8 samples of a group.
//
// This is the only step that depends on the learning algorithm. df is the
// derivative of the loss with respect to a.x: for least squares (linear
// regression) df = a.x - b; for the hinge loss of a linear SVM, with labels
// +1/-1, df = -b when b*(a.x) < 1 and 0 otherwise. The learning rate is a
// power of two, lambda = 2^-lr_shift, applied as an arithmetic right shift;
// the host also folds the 1/B of the mini-batch average into lr_shift.
// Values are 32-bit fixed point with FRAC_BITS fraction bits (only the hinge
// loss depends on where the binary point is).
//
// Timing: one register stage; out_valid follows in_valid by one cycle.
// The choice of losses and the fixed-point format are this design's; the
// role of the block and the shift-based learning rate are the published ones.
module mlw_serial_part
  import mlw_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  bank_vec_t dot,
  input  bank_vec_t label,
  input  loss_e     loss,
  input  prec_t     lr_shift,
  output logic      out_valid,
  output bank_vec_t scale
);

  function automatic word_t df(input word_t d, input word_t b, input loss_e l);
    word_t margin;
    if (l == LOSS_LSQ) return d - b;
    margin = b[W-1] ? -d : d;               // b * (a.x) with b = +-1
    return (margin < FIX_ONE) ? -b : word_t'(0);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      scale     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int k = 0; k < int'(BANKS); k++)
          scale[k] <= df(dot[k], label[k], loss) >>> lr_shift;
    end
  end

endmodule
