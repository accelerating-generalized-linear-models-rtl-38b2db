// Testbench for mlw_model_update: feeds groups of gradient chunks (random
// chunk count, random gaps, every few groups a batch commit) into the unit,
// with the working model held in an mlw_model_mem. A reference keeps
// x_w -= g per group and copies x <- x_w on commits; every x write and the
// final x_w contents are compared. Back-to-back single-chunk groups must
// exercise the forwarding path (bypass_hit), and the commit_first /
// commit_last pulses are counted against the number of commits.
module tb_mlw_model_update;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       g_valid, g_last_chunk, g_commit;
  chunk_t     g_sum;
  chunk_idx_t g_chunk;
  chunk_idx_t xw_raddr, xw_waddr, x_waddr;
  chunk_t     xw_rdata, xw_wdata, x_wdata;
  logic       xw_we, x_we, commit_first, commit_last, group_done, bypass_hit;

  mlw_model_update dut (.*);

  logic [CL_BITS*4-1:0] xw_rd_flat;
  // the testbench owns the memory ports while tb_own is set (clear, read-out)
  logic       tb_own = 1'b0, tb_we = 1'b0;
  chunk_idx_t tb_addr = '0;
  mlw_model_mem #(.WIDTH(LANES*W), .DEPTH(CHUNKS_MAX)) xw_mem (
    .clk(clk), .we(tb_own ? tb_we : xw_we), .waddr(tb_own ? tb_addr : xw_waddr),
    .wdata(tb_own ? '0 : xw_wdata), .raddr(tb_own ? tb_addr : xw_raddr), .rdata(xw_rd_flat));
  assign xw_rdata = chunk_t'(xw_rd_flat);

  localparam int CM = 4;
  chunk_t xw_ref [CM];
  chunk_t x_ref  [CM];
  chunk_t     x_exp_q [$];
  chunk_idx_t x_adr_q [$];
  int n_bypass = 0, n_first = 0, n_last = 0, n_commit = 0, n_group = 0, n_xw = 0;

  always @(posedge clk) if (rst_n) begin
    if (bypass_hit) n_bypass++;
    if (commit_first) n_first++;
    if (commit_last) n_last++;
    if (group_done) n_group++;
    if (x_we) begin
      checks++;
      if (x_exp_q.size() == 0 || x_wdata !== x_exp_q[0] || x_waddr != x_adr_q[0]) begin failures++; $display("x write mismatch chunk %0d", x_waddr); end
      if (x_exp_q.size() != 0) begin void'(x_exp_q.pop_front()); void'(x_adr_q.pop_front()); end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int C, groups;
    g_valid = 0; g_last_chunk = 0; g_commit = 0; g_sum = '0; g_chunk = '0;
    repeat (2) @(posedge clk);
    // clear x_w (the memory starts with arbitrary contents)
    tb_own = 1; tb_we = 1;
    for (int c = 0; c < CM; c++) begin
      tb_addr = chunk_idx_t'(c);
      @(negedge clk);
    end
    tb_own = 0; tb_we = 0;
    for (int c = 0; c < CM; c++) begin xw_ref[c] = '0; x_ref[c] = '0; end
    rst_n = 1;
    for (int blk = 0; blk < 60; blk++) begin
      C = (blk < 20) ? 1 : 1 + ($urandom % CM);
      groups = 1 + ($urandom % 4);
      for (int g = 0; g < groups; g++) begin
        for (int c = 0; c < C; c++) begin
          @(negedge clk);
          g_valid = 1; g_chunk = chunk_idx_t'(c); g_last_chunk = (c == C - 1);
          g_commit = (g == groups - 1);
          for (int j = 0; j < LANES; j++) begin
            g_sum[j] = word_t'($urandom % 2001) - 1000;
            xw_ref[c][j] -= g_sum[j];
          end
          if (g_commit) begin
            x_ref[c] = xw_ref[c];
            x_exp_q.push_back(x_ref[c]);
            x_adr_q.push_back(chunk_idx_t'(c));
          end
        end
        if (blk >= 40 && ($urandom % 2)) begin
          @(negedge clk) g_valid = 0;
          repeat ($urandom % 3) @(negedge clk);
        end
      end
      n_commit++;
    end
    @(negedge clk) g_valid = 0;
    repeat (5) @(posedge clk);
    // final working model through the read port
    for (int c = 0; c < CM; c++) begin
      @(negedge clk) begin tb_own = 1; tb_addr = chunk_idx_t'(c); end
      @(posedge clk); #1;
      checks++;
      if (xw_rdata !== xw_ref[c]) begin failures++; $display("x_w chunk %0d mismatch", c); end
    end
    checks += 4;
    if (n_bypass == 0) begin failures++; $display("forwarding never used"); end
    if (n_first != n_commit) begin failures++; $display("commit_first %0d of %0d", n_first, n_commit); end
    if (n_last != n_commit) begin failures++; $display("commit_last %0d of %0d", n_last, n_commit); end
    if (n_group == 0) begin failures++; $display("no group_done"); end
    $display("bypass=%0d commits=%0d groups=%0d", n_bypass, n_commit, n_group);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
