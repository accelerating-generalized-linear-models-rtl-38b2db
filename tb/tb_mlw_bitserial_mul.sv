// Testbench for mlw_bitserial_mul: random operands and quantized values at
// random precisions; each lane's product must equal sum_i a[i]*(x >>> i) and
// appear exactly one cycle after the last bit. Also checks that a stalled
// cycle (en low) between bits changes nothing.
module tb_mlw_bitserial_mul;
  import mlw_pkg::*;
  localparam int L = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, first, last, prod_valid;
  prec_t shamt;
  logic [L-1:0] bits;
  word_t [L-1:0] opnd, prod;

  mlw_bitserial_mul #(.LANES_P(L)) dut (.*);

  function automatic word_t ref_mul(word_t x, logic [31:0] a, int s);
    word_t r = 0;
    for (int i = 1; i <= s; i++) if (a[32-i]) r += x >>> i;
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a [L];
    int s;
    en = 0; first = 0; last = 0; shamt = 0; bits = 0; opnd = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      s = (t == 0) ? 32 : (t == 1) ? 1 : 1 + ($urandom % 12);
      for (int j = 0; j < L; j++) begin
        a[j] = $urandom;
        opnd[j] = (t % 3 == 0) ? word_t'(-($urandom % 100000)) : word_t'($urandom);
      end
      for (int i = 0; i < s; i++) begin
        // occasionally insert an idle cycle
        if ($urandom % 4 == 0) begin
          en <= 0; @(posedge clk);
        end
        en <= 1; first <= (i == 0); last <= (i == s - 1); shamt <= prec_t'(i + 1);
        for (int j = 0; j < L; j++) bits[j] <= a[j][31-i];
        @(posedge clk);
      end
      en <= 0; first <= 0; last <= 0;
      #1;
      checks++;
      if (!prod_valid) begin failures++; $display("prod_valid missing t=%0d", t); end
      for (int j = 0; j < L; j++) begin
        checks++;
        if (prod[j] !== ref_mul(opnd[j], a[j], s)) begin
          failures++;
          if (failures < 10) $display("lane %0d s=%0d got %h exp %h", j, s, prod[j], ref_mul(opnd[j], a[j], s));
        end
      end
      @(posedge clk); #1;
      checks++;
      if (prod_valid) begin failures++; $display("prod_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
