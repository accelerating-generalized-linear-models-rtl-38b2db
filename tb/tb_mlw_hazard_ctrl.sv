// Testbench for mlw_hazard_ctrl: a random mix of group reads (rd_take,
// only when granted) and batch commits (chunk writes 0..C-1 spaced a few
// cycles apart) in both chaining modes. An independent model of the two
// counters and the chunk guard is compared every cycle with rd_counter,
// wr_counter, rd_grant and chunk_ok. Both a refused read (rd_grant low) and
// a guard refusal (chunk_ok low) must be seen.
module tb_mlw_hazard_ctrl;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             init, chaining, rd_grant, rd_take, chunk_ok;
  logic             x_we, commit_first, commit_last;
  logic [CNT_W-1:0] batch, rd_counter, wr_counter;
  chunk_idx_t       rd_chunk, x_waddr;

  mlw_hazard_ctrl dut (.*);

  // reference
  logic [CNT_W-1:0] m_rd, m_wr;
  int               m_ptr;
  bit               m_pend;
  int n_refused = 0, n_guard = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare just before each rising edge, then advance the model
  always @(posedge clk) if (rst_n) begin
    checks += 4;
    if (rd_counter !== m_rd) begin failures++; $display("rd_counter %0d exp %0d", rd_counter, m_rd); end
    if (wr_counter !== m_wr) begin failures++; $display("wr_counter %0d exp %0d", wr_counter, m_wr); end
    if (rd_grant !== (m_rd != m_wr)) begin failures++; $display("rd_grant wrong"); end
    if (chunk_ok !== (!m_pend || int'(rd_chunk) < m_ptr)) begin failures++; $display("chunk_ok wrong"); end
    if (!rd_grant) n_refused++;
    if (!chunk_ok) n_guard++;
    if (init) begin
      m_rd = 0; m_wr = batch; m_pend = 0; m_ptr = 0;
    end else begin
      if (rd_take) m_rd += 8;
      if ((chaining && commit_first) || (!chaining && commit_last)) m_wr += batch;
      if (commit_first) m_pend = !commit_last;
      else if (commit_last) m_pend = 0;
      if (x_we) m_ptr = int'(x_waddr) + 1;
    end
  end

  int C, s_gap, wchunk, wgap, cmt_left;
  bit cmt_active;

  initial begin
    init = 0; chaining = 0; rd_take = 0; rd_chunk = '0; x_we = 0; x_waddr = '0;
    commit_first = 0; commit_last = 0; batch = 16;
    m_rd = 0; m_wr = 0; m_pend = 0; m_ptr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      @(negedge clk);
      chaining = run[0];
      batch = CNT_W'(8 * (1 + ($urandom % 4)));
      C = 1 + ($urandom % 6);
      s_gap = 1 + ($urandom % 4);
      init = 1; rd_take = 0; x_we = 0; commit_first = 0; commit_last = 0;
      @(negedge clk) init = 0;
      cmt_active = 0;
      for (int cyc = 0; cyc < 2000; cyc++) begin
        rd_chunk = chunk_idx_t'($urandom % C);
        rd_take = rd_grant && ($urandom % 3 == 0);
        // start a commit now and then when the reader has gone ahead
        x_we = 0; commit_first = 0; commit_last = 0;
        if (!cmt_active && (rd_counter - wr_counter == 0 || $urandom % 50 == 0)) begin
          cmt_active = 1; wchunk = 0; wgap = 0;
        end
        if (cmt_active) begin
          if (wgap == 0) begin
            x_we = 1; x_waddr = chunk_idx_t'(wchunk);
            commit_first = (wchunk == 0); commit_last = (wchunk == C - 1);
            wchunk++;
            wgap = s_gap;
            if (wchunk == C) cmt_active = 0;
          end else wgap--;
        end
        @(negedge clk);
      end
      rd_take = 0; x_we = 0; commit_first = 0; commit_last = 0;
    end
    rd_take = 0; x_we = 0; commit_first = 0; commit_last = 0;
    @(negedge clk);
    checks += 2;
    if (n_refused == 0) begin failures++; $display("read never refused"); end
    if (n_guard == 0) begin failures++; $display("guard never active"); end
    $display("refused=%0d guard=%0d", n_refused, n_guard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
