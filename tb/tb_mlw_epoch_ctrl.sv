// Testbench for mlw_epoch_ctrl: runs jobs with fixed and with dynamic
// precision and checks, for every epoch_start, the epoch number, the
// precision (fixed value, or 2 bits for epochs 1-4, then one bit more each
// time the epoch number passes a power of two, at most 32) and the
// learning-rate shift (one more after epoch alpha). done must pulse once,
// in the cycle after the one in which the last epoch_done is sampled, and the
// next epoch_start must follow one cycle later than that.
module tb_mlw_epoch_ctrl;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, adaptive, epoch_start, epoch_done, busy, done;
  logic [15:0] epochs, alpha, cur_epoch;
  prec_t       prec_fixed, lr_shift, cur_prec, cur_lr_shift;

  mlw_epoch_ctrl dut (.*);

  // independent precision schedule, by table
  function automatic int exp_prec(int e);
    if (e <= 4) return 2;
    for (int b = 3; b <= 32; b++) if (e <= (1 << b)) return b;
    return 32;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int E, A, P, L, t0, t1;
    bit ad;
    start = 0; adaptive = 0; epoch_done = 0; epochs = 0; alpha = 0; prec_fixed = '0; lr_shift = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 8; job++) begin
      ad = job[0];
      E = (job == 7) ? 300 : 1 + ($urandom % 40);
      A = $urandom % 20;
      P = 1 + ($urandom % 32);
      L = $urandom % 20;
      @(negedge clk);
      epochs = 16'(E); alpha = 16'(A); adaptive = ad; prec_fixed = prec_t'(P); lr_shift = prec_t'(L); start = 1;
      @(negedge clk) start = 0;
      for (int e = 1; e <= E; e++) begin
        t0 = 0;
        while (!epoch_start) begin @(posedge clk); #1; t0++; end
        checks += 3;
        if (cur_epoch != 16'(e)) begin failures++; $display("epoch %0d reported %0d", e, cur_epoch); end
        if (cur_prec != prec_t'(ad ? exp_prec(e) : P)) begin
          failures++; $display("job %0d epoch %0d prec %0d", job, e, cur_prec);
        end
        if (cur_lr_shift != prec_t'(e > A ? L + 1 : L)) begin
          failures++; $display("job %0d epoch %0d lr %0d", job, e, cur_lr_shift);
        end
        if (e > 1) begin
          checks++;
          if (t0 != 1) begin failures++; $display("epoch %0d started %0d cycles after done", e, t0); end
        end
        repeat ($urandom % 5) @(posedge clk);
        @(negedge clk) epoch_done = 1;
        @(negedge clk) epoch_done = 0;
        #1;
      end
      t1 = 0;
      while (!done && t1 < 10) begin #1; if (!done) begin @(posedge clk); #1; t1++; end end
      checks += 2;
      if (!done || t1 != 0) begin failures++; $display("job %0d done late or missing (%0d)", job, t1); end
      @(posedge clk); #1;
      if (busy || done) begin failures++; $display("job %0d not idle after done", job); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
