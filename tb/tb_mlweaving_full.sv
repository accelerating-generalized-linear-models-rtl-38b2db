// Full-size run of mlweaving_top: the engine with every parameter at its
// default (16K-line sample FIFO, 32K-value models) trains one epoch of
// least-squares SGD with chaining on an Epsilon-sized feature count (2000
// features, 32 chunks of 64) at 4 bits, on 64 random samples, batch 16.
// The memory model, label stream and reference model are those of the
// small end-to-end testbench: lines are built on the fly from the
// bit-transposed layout, and the final model read back through the host
// port must equal the reference bit for bit. The run must also take at
// least the read time (N/8)*C*s and see the batch commits and the
// read-after-write stalls between batches.
module tb_mlweaving_full;
  import mlw_pkg::*;

  localparam int NMAX = 64, MMAX = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ DUT
  logic              start, adaptive, chaining;
  logic [31:0]       num_samples;
  logic [15:0]       num_features, alpha, epochs, cur_epoch;
  logic [CNT_W-1:0]  batch;
  prec_t             prec_fixed, lr_shift, cur_prec;
  loss_e             loss;
  logic [ADDR_W-1:0] base, req_addr;
  logic              req_valid, req_ready, line_valid, line_ready, lbl_valid, lbl_ready;
  line_t             line_data;
  bank_vec_t         lbl_data;
  logic              host_mdl_we;
  chunk_idx_t        host_mdl_waddr, host_mdl_raddr;
  chunk_t            host_mdl_wdata, host_mdl_rdata;
  logic              busy, done;
  stats_t            stats;

  mlweaving_top dut (.*);

  // ------------------------------------------------------------ data
  logic [31:0] feat [NMAX][MMAX];
  word_t       lbl  [NMAX];
  word_t       xr   [MMAX];      // reference architectural model
  word_t       xwr  [MMAX];      // reference working model
  int          cfg_n, cfg_m, cfg_c;

  function automatic line_t make_line(logic [ADDR_W-1:0] a);
    int idx, w, blk, c, g, m;
    line_t l;
    idx = int'(a - base);
    w = idx % 32; blk = idx / 32; c = blk % cfg_c; g = blk / cfg_c;
    l = '0;
    for (int k = 0; k < 8; k++)
      for (int j = 0; j < 64; j++) begin
        m = 64 * c + j;
        if (m < cfg_m) l[64*k + j] = feat[8*g + k][m][31 - w];
      end
    return l;
  endfunction

  // ------------------------------------------------------------ memory model
  logic [ADDR_W-1:0] rq_addr [$];
  longint            rq_time [$];
  bit                mem_jitter;

  always @(negedge clk) begin
    req_ready = mem_jitter ? ($urandom % 8 != 0) : 1'b1;
    if (rq_addr.size() != 0 && rq_time[0] <= cyc) begin
      line_valid = mem_jitter ? ($urandom % 6 != 0) : 1'b1;
      line_data  = make_line(rq_addr[0]);
    end else begin
      line_valid = 1'b0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (line_valid && line_ready) begin
      void'(rq_addr.pop_front());
      void'(rq_time.pop_front());
    end
    if (req_valid && req_ready) begin
      rq_addr.push_back(req_addr);
      rq_time.push_back(cyc + 2 + (mem_jitter ? $urandom % 4 : 0));
    end
  end

  // label stream: groups 0..N/8-1 in order, every epoch
  int lbl_g = 0;
  always @(negedge clk) begin
    lbl_valid = mem_jitter ? ($urandom % 5 != 0) : 1'b1;
    for (int k = 0; k < 8; k++) lbl_data[k] = lbl[8 * lbl_g + k];
  end
  always @(posedge clk) if (rst_n && lbl_valid && lbl_ready)
    lbl_g <= (lbl_g + 1 == cfg_n / 8) ? 0 : lbl_g + 1;

  // ------------------------------------------------------------ reference
  int n_hinge_active = 0, n_hinge_zero = 0;

  function automatic word_t ref_df(word_t d, word_t b, loss_e l);
    if (l == LOSS_LSQ) return d - b;
    if (((b < 0) ? -d : d) < FIX_ONE) begin n_hinge_active++; return -b; end
    n_hinge_zero++;
    return 0;
  endfunction

  task automatic ref_epoch(int s, int lr, int bsz, loss_e l);
    word_t dotv, g;
    word_t sc [8];
    int n;
    for (int b0 = 0; b0 < cfg_n; b0 += bsz) begin
      for (int g0 = b0; g0 < b0 + bsz; g0 += 8) begin
        for (int k = 0; k < 8; k++) begin
          n = g0 + k;
          dotv = 0;
          for (int m = 0; m < cfg_m; m++)
            for (int i = 1; i <= s; i++)
              if (feat[n][m][32 - i]) dotv += xr[m] >>> i;
          sc[k] = ref_df(dotv, lbl[n], l) >>> lr;
        end
        for (int m = 0; m < cfg_m; m++) begin
          g = 0;
          for (int k = 0; k < 8; k++)
            for (int i = 1; i <= s; i++)
              if (feat[g0 + k][m][32 - i]) g += sc[k] >>> i;
          xwr[m] -= g;
        end
      end
      for (int m = 0; m < cfg_m; m++) xr[m] = xwr[m];
    end
  endtask

  function automatic int exp_prec(int e, bit ad, int p);
    if (!ad) return p;
    if (e <= 4) return 2;
    for (int b = 3; b <= 32; b++) if (e <= (1 << b)) return b;
    return 32;
  endfunction

  // ------------------------------------------------------------ mechanism counts
  int n_raw_stall = 0, n_guard = 0, n_fifo = 0, n_bypass = 0, n_commits = 0;
  int n_prec_switch = 0, n_lr_decay = 0, n_chain_gain = 0, n_lsq = 0, n_hinge = 0;
  prec_t last_prec;
  always @(posedge clk) if (busy) begin
    if (cur_prec != last_prec && last_prec != 0 && cur_prec != 0) n_prec_switch++;
    last_prec <= cur_prec;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ jobs
  task automatic load_data(int n, int m, bit hinge_lbl);
    cfg_n = n; cfg_m = m; cfg_c = (m + 63) / 64;
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < MMAX; j++) feat[i][j] = $urandom;
      lbl[i] = hinge_lbl ? (($urandom % 2) ? FIX_ONE : -FIX_ONE)
                         : word_t'(($urandom % (2 * FIX_ONE)) - FIX_ONE);
    end
  endtask

  task automatic load_model();
    chunk_t ch;
    @(negedge clk);
    for (int c = 0; c < cfg_c; c++) begin
      for (int j = 0; j < 64; j++) begin
        ch[j] = word_t'($urandom % (FIX_ONE / 4)) - FIX_ONE / 8;
        xr[64 * c + j] = ch[j];
        xwr[64 * c + j] = ch[j];
      end
      host_mdl_we = 1; host_mdl_waddr = chunk_idx_t'(c); host_mdl_wdata = ch;
      @(negedge clk);
    end
    host_mdl_we = 0;
  endtask

  task automatic check_model(string tag);
    int bad = 0;
    for (int c = 0; c < cfg_c; c++) begin
      @(negedge clk) host_mdl_raddr = chunk_idx_t'(c);
      @(negedge clk);
      for (int j = 0; j < 64; j++) begin
        checks++;
        if (host_mdl_rdata[j] !== xr[64 * c + j]) begin
          failures++;
          if (bad++ < 4) $display("%s: x[%0d] = %h, expected %h", tag, 64 * c + j, host_mdl_rdata[j], xr[64 * c + j]);
        end
      end
    end
  endtask

  // runs one job; returns the cycles from start to done
  task automatic run_job(string tag, int bsz, int s, bit ad, int lr, int al, int ep,
                         loss_e l, bit ch, output longint cycles);
    longint t0;
    @(negedge clk);
    num_samples = cfg_n; num_features = 16'(cfg_m); batch = CNT_W'(bsz);
    prec_fixed = prec_t'(s); adaptive = ad; lr_shift = prec_t'(lr); alpha = 16'(al);
    epochs = 16'(ep); loss = l; chaining = ch;
    base = ADDR_W'(64'h1000 + 64'h100 * ($urandom % 16));
    lbl_g = 0;
    start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    for (int e = 1; e <= ep; e++) begin
      ref_epoch(exp_prec(e, ad, s), (e > al) ? lr + 1 : lr, bsz, l);
      if (e > al) n_lr_decay++;
    end
    while (!done) @(posedge clk);
    cycles = cyc - t0;
    @(negedge clk);
    checks += 2;
    if (stats.commits != 32'(ep * cfg_n / bsz)) begin
      failures++; $display("%s: %0d commits, expected %0d", tag, stats.commits, ep * cfg_n / bsz);
    end
    if (stats.groups != 32'(ep * cfg_n / 8)) begin
      failures++; $display("%s: %0d groups, expected %0d", tag, stats.groups, ep * cfg_n / 8);
    end
    n_raw_stall += stats.raw_stall;
    n_guard     += stats.guard_stall;
    n_fifo      += stats.fifo_stall;
    n_bypass    += stats.bypass;
    n_commits   += stats.commits;
    if (l == LOSS_LSQ) n_lsq++; else n_hinge++;
    check_model(tag);
    $display("%s: %0d cycles, lines=%0d raw_stall=%0d guard=%0d fifo=%0d bypass=%0d",
             tag, cycles, stats.lines, stats.raw_stall, stats.guard_stall, stats.fifo_stall, stats.bypass);
  endtask

  initial begin
    longint t;
    start = 0; num_samples = 0; num_features = 0; batch = 0; prec_fixed = 0; adaptive = 0;
    lr_shift = 0; alpha = 0; epochs = 0; loss = LOSS_LSQ; chaining = 0; base = '0;
    host_mdl_we = 0; host_mdl_waddr = '0; host_mdl_wdata = '0; host_mdl_raddr = '0;
    mem_jitter = 0; last_prec = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    load_data(64, 2000, 0);
    load_model();
    run_job("full size: M=2000 s=4 B=16 chaining", 16, 4, 0, 9, 100, 1, LOSS_LSQ, 1, t);
    checks += 3;
    if (t < (64 / 8) * 32 * 4) begin failures++; $display("faster than the line rate"); end
    if (n_raw_stall == 0) begin failures++; $display("no read-after-write stall"); end
    if (n_commits != 4) begin failures++; $display("%0d commits", n_commits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
