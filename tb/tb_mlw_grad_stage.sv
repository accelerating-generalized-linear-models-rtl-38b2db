// Testbench for mlw_grad_stage: queues scale sets and the matching bit-plane
// lines (with random gaps in line availability), and checks every emitted
// gradient chunk element against sum_k sum_i a_k[i]*(scale_k >>> i), plus the
// chunk index, last-chunk and commit (last group of the mini-batch) tags.
// With lines always available it also checks one chunk per s cycles.
module tb_mlw_grad_stage;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, scale_valid, scale_pop, line_avail, line_pop;
  logic g_valid, g_last_chunk, g_commit, busy;
  prec_t prec;
  logic [CHUNK_W:0] chunks;
  logic [CNT_W-1:0] grp_per_batch;
  bank_vec_t scale;
  line_t line;
  chunk_t g_sum;
  chunk_idx_t g_chunk;

  mlw_grad_stage dut (.*);

  bank_vec_t sq [$];
  line_t     lq [$];
  typedef struct { chunk_t sum; int chunk; bit last; bit commit; } exp_t;
  exp_t eq [$];
  logic gaps;
  int cyc = 0, last_out = -1, spacing_bad = 0, nout = 0;


  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (scale_pop) void'(sq.pop_front());
    if (line_pop)  void'(lq.pop_front());
    if (rst_n && g_valid) begin
      nout++;
      if (!gaps && last_out >= 0 && eq[0].chunk != 0 && cyc - last_out != int'(prec)) spacing_bad++;
      last_out = cyc;
      checks += 3;
      if (int'(g_chunk) != eq[0].chunk) begin failures++; $display("chunk %0d exp %0d", g_chunk, eq[0].chunk); end
      if (g_last_chunk != eq[0].last) begin failures++; $display("last_chunk wrong"); end
      if (g_commit != eq[0].commit) begin failures++; $display("commit wrong"); end
      for (int j = 0; j < LANES; j++) begin
        checks++;
        if (g_sum[j] !== eq[0].sum[j]) begin
          failures++;
          if (failures < 10) $display("elem %0d got %h exp %h", j, g_sum[j], eq[0].sum[j]);
        end
      end
      void'(eq.pop_front());
    end
  end

  always @(negedge clk) begin
    scale_valid = sq.size() != 0;
    scale       = (sq.size() != 0) ? sq[0] : '0;
    line        = (lq.size() != 0) ? lq[0] : '0;
    line_avail  = (lq.size() != 0) && (!gaps || ($urandom % 3 != 0));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int s, int C, int G, int ngroups, bit with_gaps);
    gaps = with_gaps;
    prec = prec_t'(s); chunks = (CHUNK_W+1)'(C); grp_per_batch = CNT_W'(G);
    init = 1; @(posedge clk); init = 0;
    for (int g = 0; g < ngroups; g++) begin
      bank_vec_t sc;
      for (int k = 0; k < BANKS; k++) sc[k] = word_t'($signed($urandom) >>> ($urandom % 12));
      for (int c = 0; c < C; c++) begin
        exp_t e;
        line_t ln [32];
        for (int i = 0; i < s; i++) for (int w = 0; w < CL_BITS/32; w++) ln[i][w*32 +: 32] = $urandom;
        for (int j = 0; j < LANES; j++) begin
          e.sum[j] = 0;
          for (int k = 0; k < BANKS; k++)
            for (int i = 0; i < s; i++)
              if (ln[i][k*LANES + j]) e.sum[j] += sc[k] >>> (i + 1);
        end
        e.chunk = c; e.last = (c == C - 1); e.commit = ((g % G) == G - 1);
        eq.push_back(e);
        for (int i = 0; i < s; i++) lq.push_back(ln[i]);
      end
      sq.push_back(sc);
    end
    last_out = -1;
    while (eq.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    init = 0; prec = 1; chunks = 1; grp_per_batch = 1; gaps = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(3, 2, 2, 4, 0);
    run(1, 1, 1, 5, 0);
    run(5, 3, 4, 8, 1);
    run(32, 1, 2, 2, 0);
    run(2, 4, 2, 6, 1);
    checks++;
    if (spacing_bad != 0) begin failures++; $display("chunk spacing differed from s %0d times", spacing_bad); end
    checks++;
    if (nout != 2*4 + 5 + 3*8 + 2 + 4*6) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
