// End-to-end testbench for mlweaving_top.
//
// A small dataset (up to 64 samples, 256 features, 32-bit fractional
// features) is kept in the testbench in row form. A memory model answers the
// engine's cache-line requests in order, after a random latency, building
// each line on the fly from the bit-transposed layout: the address gives
// group g, chunk c and bit plane w, and bank k, lane j of the line is bit w
// (MSB first) of feature 64c+j of sample 8g+k. Labels are streamed one group
// at a time. A reference model runs the same synchronous mini-batch SGD with
// the same fixed-point arithmetic (bit-serial products truncated per bit,
// 32-bit wrap, scale = df >>> lr, x_w updated per group of 8, x <- x_w per
// batch), and the final model read back through the host port must match it
// exactly.
//
// Jobs: least squares with and without chaining (same data, cycle counts
// compared with the read time (N/8)*C*s and the C*s update time per batch),
// a single-chunk model (forwarding in the update), dynamic precision with a
// learning-rate decay, hinge loss, and a precision high enough to fill the
// (reduced) sample FIFO. Each mechanism is counted; one that never happens
// is a failure. The sample FIFO is reduced to 64 lines so that back-pressure
// is reachable; every job keeps C*s <= 64. The chunk guard of the hazard
// controller is a safety net that should never have to act; its stall count
// is printed but not required.
module tb_mlweaving_top;
  import mlw_pkg::*;

  localparam int FD = 64;
  localparam int NMAX = 64, MMAX = 256;

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

  mlweaving_top #(.FIFO_DEPTH(FD)) dut (.*);

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
    longint t_plain, t_chain, t;
    int nb, read_t, upd_t;
    start = 0; num_samples = 0; num_features = 0; batch = 0; prec_fixed = 0; adaptive = 0;
    lr_shift = 0; alpha = 0; epochs = 0; loss = LOSS_LSQ; chaining = 0; base = '0;
    host_mdl_we = 0; host_mdl_waddr = '0; host_mdl_wdata = '0; host_mdl_raddr = '0;
    mem_jitter = 0; last_prec = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // 1+2: chaining off and on, same data and model, ideal memory
    load_data(64, 200, 0);
    load_model();
    run_job("lsq s=6 C=4 B=16 no chaining", 16, 6, 0, 7, 100, 2, LOSS_LSQ, 0, t_plain);
    load_model();
    run_job("lsq s=6 C=4 B=16 chaining", 16, 6, 0, 7, 100, 2, LOSS_LSQ, 1, t_chain);
    // An epoch reads (N/8)*C*s lines at one per cycle. Without chaining the
    // next batch waits for the whole update of x (C chunks, one per s cycles);
    // with chaining it starts after the first chunk, so each batch that has a
    // successor in the epoch saves (C-1)*s cycles.
    nb = 2 * 64 / 16;
    read_t = 2 * (64 / 8) * 4 * 6;
    upd_t = 3 * 6;
    checks += 3;
    if (t_chain < read_t) begin failures++; $display("chaining run faster than the line rate"); end
    if (t_plain - t_chain != longint'(nb - 2) * upd_t) begin
      failures++; $display("chaining saved %0d cycles, expected %0d", t_plain - t_chain, (nb - 2) * upd_t);
    end
    else n_chain_gain++;
    // the published cost model charges each batch a pipeline latency of
    // 40+2s cycles with chaining and C*s more without; this pipeline must
    // not be slower
    if (t_chain > read_t + nb * (40 + 2 * 6)) begin failures++; $display("chaining run too slow: %0d", t_chain); end
    checks++;
    if (t_plain > read_t + nb * (40 + 2 * 6 + 4 * 6)) begin failures++; $display("run without chaining too slow: %0d", t_plain); end
    $display("read time %0d, no chaining %0d (+%0d per batch), chaining %0d (+%0d per batch)",
             read_t, t_plain, (t_plain - read_t) / nb, t_chain, (t_chain - read_t) / nb);

    // 3: one chunk at one bit: groups update the same chunk in consecutive
    // cycles (forwarding in the update); B = 32
    load_data(64, 40, 0);
    load_model();
    run_job("lsq C=1 s=1 B=32", 32, 1, 0, 6, 100, 2, LOSS_LSQ, 1, t);
    mem_jitter = 1;

    // 4: dynamic precision over 6 epochs, learning rate halved after epoch 3
    load_data(32, 70, 0);
    load_model();
    run_job("lsq dynamic precision", 16, 0, 1, 6, 3, 6, LOSS_LSQ, 1, t);

    // 5: hinge loss
    load_data(48, 128, 1);
    load_model();
    run_job("hinge", 16, 8, 0, 5, 100, 2, LOSS_HINGE, 0, t);

    // 6: s = 32 with two chunks fills the 64-line sample FIFO
    mem_jitter = 0;
    load_data(32, 128, 0);
    load_model();
    run_job("lsq s=32 C=2", 16, 32, 0, 8, 100, 1, LOSS_LSQ, 1, t);

    $display("mechanisms: raw_stall=%0d guard=%0d fifo_stall=%0d bypass=%0d commits=%0d prec_switch=%0d lr_decay=%0d chain_gain=%0d lsq=%0d hinge=%0d (active %0d, zero %0d)",
             n_raw_stall, n_guard, n_fifo, n_bypass, n_commits, n_prec_switch, n_lr_decay,
             n_chain_gain, n_lsq, n_hinge, n_hinge_active, n_hinge_zero);
    checks += 10;
    if (n_raw_stall == 0)    begin failures++; $display("no read-after-write stall"); end
    if (n_fifo == 0)         begin failures++; $display("sample FIFO never full"); end
    if (n_bypass == 0)       begin failures++; $display("update forwarding never used"); end
    if (n_commits == 0)      begin failures++; $display("no batch commit"); end
    if (n_prec_switch == 0)  begin failures++; $display("precision never switched"); end
    if (n_lr_decay == 0)     begin failures++; $display("learning rate never decayed"); end
    if (n_chain_gain == 0)   begin failures++; $display("chaining gave no gain"); end
    if (n_lsq == 0 || n_hinge == 0) begin failures++; $display("a loss was not run"); end
    if (n_hinge_active == 0) begin failures++; $display("hinge never active"); end
    if (n_hinge_zero == 0)   begin failures++; $display("hinge never zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
