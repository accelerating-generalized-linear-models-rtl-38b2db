// Testbench for mlw_adder_tree: a 64-input and an 8-input tree take a new
// random input set every cycle (with gaps); each sum must leave exactly
// log2(N) cycles later, in order, and equal the 32-bit wrapped sum.
module tb_mlw_adder_tree;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv64, ov64, iv8, ov8;
  logic [63:0][31:0] in64;
  logic [7:0][31:0]  in8;
  logic [31:0] s64, s8;

  mlw_adder_tree #(.N(64), .W(32)) t64 (.clk, .rst_n, .in_valid(iv64), .in_data(in64), .out_valid(ov64), .out_sum(s64));
  mlw_adder_tree #(.N(8),  .W(32)) t8  (.clk, .rst_n, .in_valid(iv8),  .in_data(in8),  .out_valid(ov8),  .out_sum(s8));

  logic [31:0] exp64 [$];
  logic [31:0] exp8 [$];
  int t_in64 [$];
  int t_in8 [$];
  int cyc = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ov64) begin
      checks += 2;
      if (s64 !== exp64[0]) begin failures++; $display("sum64 %h exp %h", s64, exp64[0]); end
      if (cyc - t_in64[0] != 6) begin failures++; $display("latency64 %0d", cyc - t_in64[0]); end
      void'(exp64.pop_front()); void'(t_in64.pop_front());
    end
    if (rst_n && ov8) begin
      checks += 2;
      if (s8 !== exp8[0]) begin failures++; $display("sum8 %h exp %h", s8, exp8[0]); end
      if (cyc - t_in8[0] != 3) begin failures++; $display("latency8 %0d", cyc - t_in8[0]); end
      void'(exp8.pop_front()); void'(t_in8.pop_front());
    end
  end

  initial begin
    logic [31:0] e;
    iv64 = 0; iv8 = 0; in64 = '0; in8 = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 300; t++) begin
      iv64 <= ($urandom % 3 != 0);
      iv8  <= ($urandom % 3 != 0);
      for (int j = 0; j < 64; j++) in64[j] <= $urandom;
      for (int j = 0; j < 8; j++)  in8[j]  <= $urandom;
      #1;
      @(negedge clk);
      if (iv64) begin e = 0; for (int j = 0; j < 64; j++) e += in64[j]; exp64.push_back(e); t_in64.push_back(cyc); end
      if (iv8)  begin e = 0; for (int j = 0; j < 8; j++)  e += in8[j];  exp8.push_back(e);  t_in8.push_back(cyc); end
      @(posedge clk);
    end
    iv64 <= 0; iv8 <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp64.size() != 0 || exp8.size() != 0) begin failures++; $display("sums missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
