// Testbench for mlw_serial_part: checks scale = (df >>> lr_shift) for the
// least-squares derivative (a.x - b) and the hinge derivative (-b when
// b*(a.x) < 1, else 0, with labels +-1.0 in Q8.24), one cycle after in_valid.
module tb_mlw_serial_part;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  bank_vec_t dot, label, scale;
  loss_e loss;
  prec_t lr_shift;

  mlw_serial_part dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_vec_t e;
    longint m;
    in_valid = 0; dot = '0; label = '0; loss = LOSS_LSQ; lr_shift = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 400; t++) begin
      loss = (t % 2) ? LOSS_HINGE : LOSS_LSQ;
      lr_shift = prec_t'($urandom % 20);
      for (int k = 0; k < BANKS; k++) begin
        dot[k] = word_t'($signed($urandom) >>> ($urandom % 8));
        if (loss == LOSS_HINGE) begin
          label[k] = ($urandom % 2) ? (32'sd1 <<< 24) : -(32'sd1 <<< 24);
          if (k == 0) dot[k] = label[k];                       // margin exactly 1: no update
          if (k == 1) dot[k] = label[k] - 1;                   // just inside the margin
        end else begin
          label[k] = word_t'($signed($urandom) >>> 3);
        end
        if (loss == LOSS_LSQ) e[k] = (dot[k] - label[k]) >>> lr_shift;
        else begin
          m = longint'(dot[k]) * longint'(label[k] >>> 24);  // b*(a.x) with b = +-1
          e[k] = (m < (64'sd1 <<< 24)) ? (-label[k]) >>> lr_shift : 0;
        end
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int k = 0; k < BANKS; k++) begin
        checks++;
        if (scale[k] !== e[k]) begin
          failures++;
          $display("t=%0d k=%0d loss=%0d dot=%h b=%h got %h exp %h", t, k, loss, dot[k], label[k], scale[k], e[k]);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
