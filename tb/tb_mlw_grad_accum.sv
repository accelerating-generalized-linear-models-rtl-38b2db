// Testbench for mlw_grad_accum: random 8-bank gradient chunks, one per cycle
// with gaps; each of the 64 outputs must be the wrapped sum over the banks,
// 3 cycles after the input.
module tb_mlw_grad_accum;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  chunk_t [BANKS-1:0] grad;
  chunk_t sum;

  mlw_grad_accum dut (.*);

  chunk_t exp_q [$];
  int t_q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - t_q[0] != 3) begin failures++; $display("latency %0d", cyc - t_q[0]); end
    for (int j = 0; j < LANES; j++) begin
      checks++;
      if (sum[j] !== exp_q[0][j]) begin failures++; $display("elem %0d got %h exp %h", j, sum[j], exp_q[0][j]); end
    end
    void'(exp_q.pop_front()); void'(t_q.pop_front());
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chunk_t e;
    in_valid = 0; grad = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      for (int k = 0; k < BANKS; k++) for (int j = 0; j < LANES; j++) grad[k][j] = word_t'($urandom);
      if (in_valid) begin
        for (int j = 0; j < LANES; j++) begin
          e[j] = 0;
          for (int k = 0; k < BANKS; k++) e[j] += grad[k][j];
        end
        exp_q.push_back(e);
        t_q.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("sums missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
