// Testbench for mlw_dot_bank: streams random samples (random chunk count C
// and precision s) with random model chunks; the dot product must equal
// sum over chunks and lanes of a[i]*(x >>> i), and dot_valid must rise 8
// cycles after the cycle that presents the last bit plane.
module tb_mlw_dot_bank;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, first_bit, last_bit, last_chunk, dot_valid;
  prec_t shamt;
  logic [LANES-1:0] bits;
  chunk_t model;
  word_t dot;

  mlw_dot_bank dut (.*);

  localparam int NS = 40;
  int     s_of [NS];
  int     c_of [NS];
  word_t  exp_dot [NS];
  int     t_last [NS];
  int     nout = 0;
  int     cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dot_valid) begin
      checks += 2;
      if (dot !== exp_dot[nout]) begin failures++; $display("sample %0d dot %h exp %h", nout, dot, exp_dot[nout]); end
      if (cyc - t_last[nout] != 8) begin failures++; $display("sample %0d latency %0d", nout, cyc - t_last[nout]); end
      nout++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one chunk's stimulus, generated in advance
  logic [31:0] a_mem [NS][4][LANES];
  chunk_t      m_mem [NS][4];

  initial begin
    for (int t = 0; t < NS; t++) begin
      s_of[t] = (t == 0) ? 32 : 1 + ($urandom % 12);
      c_of[t] = 1 + ($urandom % 4);
      exp_dot[t] = 0;
      for (int c = 0; c < c_of[t]; c++)
        for (int j = 0; j < LANES; j++) begin
          a_mem[t][c][j] = $urandom;
          m_mem[t][c][j] = word_t'($signed($urandom) >>> 4);
          for (int i = 1; i <= s_of[t]; i++)
            if (a_mem[t][c][j][32-i]) exp_dot[t] += m_mem[t][c][j] >>> i;
        end
    end
    in_valid = 0; first_bit = 0; last_bit = 0; last_chunk = 0; shamt = 0; bits = 0; model = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NS; t++) begin
      for (int c = 0; c < c_of[t]; c++)
        for (int i = 0; i < s_of[t]; i++) begin
          @(negedge clk);
          in_valid = 1; first_bit = (i == 0); last_bit = (i == s_of[t] - 1);
          last_chunk = (c == c_of[t] - 1); shamt = prec_t'(i + 1); model = m_mem[t][c];
          for (int j = 0; j < LANES; j++) bits[j] = a_mem[t][c][j][31-i];
          if (last_bit && last_chunk) t_last[t] = cyc;
        end
      if (t % 2 == 0) begin
        @(negedge clk);
        in_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NS) begin failures++; $display("%0d results, expected %0d", nout, NS); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
