// Testbench for mlw_fifo: random pushes and pops against a queue model on a
// small (depth 8) and a default-width instance; checks data order, full,
// empty and count, and that pushing when full / popping when empty is
// refused by the handshake the engine uses.
module tb_mlw_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int D = 8;
  logic push, pop, full, empty;
  logic [511:0] din, dout;
  logic [$clog2(D+1)-1:0] count;

  mlw_fifo #(.WIDTH(512), .DEPTH(D)) dut (.*);

  logic [511:0] q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // compare state
      checks += 3;
      if (count != q.size()) begin failures++; $display("count %0d exp %0d", count, q.size()); end
      if (full != (q.size() == D)) begin failures++; $display("full wrong"); end
      if (empty != (q.size() == 0)) begin failures++; $display("empty wrong"); end
      if (q.size() != 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("dout mismatch"); end
      end
      push = ((t / 500) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      pop  = ((t / 500) % 2 == 0) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      if (full)  push = 0;
      if (empty) pop = 0;
      for (int k = 0; k < 16; k++) din[k*32 +: 32] = $urandom;
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
