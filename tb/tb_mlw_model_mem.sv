// Testbench for mlw_model_mem: random writes and reads against an array
// model; checks the one-cycle read latency and that a read of the word
// written in the same cycle returns the old contents.
module tb_mlw_model_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WD = 2048, D = 512;
  logic we;
  logic [8:0] waddr, raddr;
  logic [WD-1:0] wdata, rdata;

  mlw_model_mem #(.WIDTH(WD), .DEPTH(D)) dut (.*);

  logic [WD-1:0] ref_mem [D];
  logic [WD-1:0] exp_r;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a);
      for (int w = 0; w < WD/32; w++) wdata[w*32 +: 32] = $urandom;
      ref_mem[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = ($urandom % 2);
      waddr = 9'($urandom % 16);
      raddr = (t % 5 == 0) ? waddr : 9'($urandom % 16);
      for (int w = 0; w < WD/32; w++) wdata[w*32 +: 32] = $urandom;
      exp_r = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp_r) begin failures++; $display("t=%0d read mismatch at %0d", t, raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
