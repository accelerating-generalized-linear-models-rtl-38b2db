// mlweaving_top: MLWeaving any-precision SGD engine for generalized linear models.
//
// The engine trains a linear model x (up to 32K 32-bit weights) with mini-batch
// SGD on a dataset stored bit-transposed: every 512-bit cache line carries one
// bit plane of 64 features for 8 samples. Reading only the first s bit planes
// of each feature chunk trains at precision s, so one stored copy of the data
// serves every precision from 1 to 32 bits and lower precision means
// proportionally less memory traffic and time.
//
// Dataflow, per group of 8 samples (one per bank):
//   addr_gen -> line stream -> front sequencer -> 8 x dot_bank (reading the
//   architectural model x, all banks the same 64 values) -> serial_part
//   (scale = lambda*df(a.x, b)) -> grad_stage (re-reads the lines from the
//   sample FIFO, 8 x 64 bit-serial multipliers, 64 element-wise adder trees)
//   -> model_update (x_w -= g every 8 samples; x <- x_w at the end of a
//   mini-batch).
// The hazard controller's rd/wr counters hold the next mini-batch's reads of x
// until the previous batch's update is in x; with chaining, the next batch
// starts as soon as the first chunk of x is updated and reads behind the
// writer.
//
// Interfaces:
//  * configuration, sampled on start while idle: num_samples N (multiple of
//    B), num_features M, batch B (power of two, multiple of 8, 1/B folded into
//    lr_shift by the host), prec_fixed / adaptive, lr_shift, alpha, epochs,
//    loss, chaining, base (cache-line address of the dataset);
//  * req_*: cache-line read requests; line_*: returned lines in request order;
//  * lbl_*: the 8 labels of each group, in group order;
//  * host_mdl_*: writes both models and reads x while the engine is idle;
//  * busy, done (pulse), cur_epoch, cur_prec and event counters (stats).
// Timing: a line is accepted per cycle when available; within a mini-batch
// the groups stream back to back, so an epoch takes about (N/8)*C*s cycles
// plus, per mini-batch, the pipeline latency (and, without chaining, the
// C*s cycles of the model update), C = ceil(M/64).
// The structure follows the published design. Port protocols, the separate
// label stream, queue depths and the pipeline registers are this design's.
module mlweaving_top
  import mlw_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = CHUNKS_MAX * S_MAX,   // 16384 lines
  parameter int unsigned Q_DEPTH    = 16                    // label / scale queues
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              start,
  input  logic [31:0]       num_samples,
  input  logic [15:0]       num_features,
  input  logic [CNT_W-1:0]  batch,
  input  prec_t             prec_fixed,
  input  logic              adaptive,
  input  prec_t             lr_shift,
  input  logic [15:0]       alpha,
  input  logic [15:0]       epochs,
  input  loss_e             loss,
  input  logic              chaining,
  input  logic [ADDR_W-1:0] base,
  // memory requests and returned lines
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  input  logic              line_valid,
  output logic              line_ready,
  input  line_t             line_data,
  // labels, one set of 8 per group
  input  logic              lbl_valid,
  output logic              lbl_ready,
  input  bank_vec_t         lbl_data,
  // model access while idle
  input  logic              host_mdl_we,
  input  chunk_idx_t        host_mdl_waddr,
  input  chunk_t            host_mdl_wdata,
  input  chunk_idx_t        host_mdl_raddr,
  output chunk_t            host_mdl_rdata,
  // status
  output logic              busy,
  output logic              done,
  output logic [15:0]       cur_epoch,
  output prec_t             cur_prec,
  output stats_t            stats
);

  localparam int unsigned QCW = $clog2(Q_DEPTH + 1);

  // ---------------------------------------------------------------- config
  logic [31:0]      groups_q;
  logic [CHUNK_W:0] chunks_q;
  logic [CNT_W-1:0] batch_q, gpb_q;
  loss_e            loss_q;
  logic             chaining_q;
  logic [ADDR_W-1:0] base_q;
  logic             job_start;
  prec_t            cur_lr;
  logic             epoch_start, epoch_done;

  assign job_start = start && !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      groups_q   <= '0;
      chunks_q   <= '0;
      batch_q    <= '0;
      gpb_q      <= '0;
      loss_q     <= LOSS_LSQ;
      chaining_q <= 1'b0;
      base_q     <= '0;
    end else if (job_start) begin
      groups_q   <= num_samples / BANKS;
      chunks_q   <= (CHUNK_W+1)'((32'(num_features) + LANES - 1) / LANES);
      batch_q    <= batch;
      gpb_q      <= batch / CNT_W'(BANKS);
      loss_q     <= loss;
      chaining_q <= chaining;
      base_q     <= base;
    end
  end

  mlw_epoch_ctrl u_epoch (
    .clk, .rst_n,
    .start       (job_start),
    .epochs, .adaptive, .prec_fixed, .lr_shift, .alpha,
    .epoch_start,
    .epoch_done,
    .cur_prec,
    .cur_lr_shift(cur_lr),
    .cur_epoch,
    .busy,
    .done
  );

  mlw_addr_gen u_addr (
    .clk, .rst_n,
    .start    (epoch_start),
    .base     (base_q),
    .groups   (groups_q),
    .chunks   (chunks_q),
    .prec     (cur_prec),
    .req_valid, .req_ready, .req_addr,
    .busy     ()
  );

  // ------------------------------------------------------- front sequencer
  logic        fr_active;                // groups left to read this epoch
  logic [31:0] fr_g_left;
  chunk_idx_t  fr_c;
  prec_t       fr_i;
  logic        fr_grp_start, fr_last_b, fr_last_c;
  logic        rd_grant, chunk_ok;
  logic        fifo_full, fifo_empty;
  logic        lq_full, lq_empty, sq_full, sq_empty;
  logic [QCW-1:0] inflight;              // groups read but not yet in grad stage
  logic        accept, can_go;

  assign fr_grp_start = (fr_c == '0) && (fr_i == '0);
  assign fr_last_b    = (fr_i == cur_prec - 1'b1);
  assign fr_last_c    = ((CHUNK_W+1)'(fr_c) == chunks_q - 1'b1);

  // everything but the line itself
  assign can_go = fr_active && !fifo_full && chunk_ok &&
                  (!fr_grp_start || (rd_grant && lbl_valid && !lq_full &&
                                     inflight < QCW'(Q_DEPTH)));
  assign accept     = can_go && line_valid;
  assign line_ready = can_go;
  assign lbl_ready  = accept && fr_grp_start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fr_active <= 1'b0;
      fr_g_left <= '0;
      fr_c      <= '0;
      fr_i      <= '0;
    end else if (epoch_start) begin
      fr_active <= (groups_q != 0);
      fr_g_left <= groups_q;
      fr_c      <= '0;
      fr_i      <= '0;
    end else if (accept) begin
      if (!fr_last_b) begin
        fr_i <= fr_i + 1'b1;
      end else begin
        fr_i <= '0;
        if (!fr_last_c) begin
          fr_c <= fr_c + 1'b1;
        end else begin
          fr_c      <= '0;
          fr_g_left <= fr_g_left - 1'b1;
          if (fr_g_left == 32'd1) fr_active <= 1'b0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- models
  chunk_idx_t x_raddr, xw_raddr, xw_waddr, x_waddr;
  chunk_t     x_rdata, xw_rdata, xw_wdata, x_wdata;
  logic       x_we, xw_we;
  chunk_idx_t u_x_waddr, u_xw_waddr;
  chunk_t     u_x_wdata, u_xw_wdata;
  logic       u_x_we, u_xw_we;

  assign x_raddr        = busy ? fr_c : host_mdl_raddr;
  assign host_mdl_rdata = x_rdata;
  assign x_we           = busy ? u_x_we     : host_mdl_we;
  assign x_waddr        = busy ? u_x_waddr  : host_mdl_waddr;
  assign x_wdata        = busy ? u_x_wdata  : host_mdl_wdata;
  assign xw_we          = busy ? u_xw_we    : host_mdl_we;
  assign xw_waddr       = busy ? u_xw_waddr : host_mdl_waddr;
  assign xw_wdata       = busy ? u_xw_wdata : host_mdl_wdata;

  mlw_model_mem #(.WIDTH(LANES*W), .DEPTH(CHUNKS_MAX)) u_x (
    .clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .raddr(x_raddr), .rdata(x_rdata)
  );
  mlw_model_mem #(.WIDTH(LANES*W), .DEPTH(CHUNKS_MAX)) u_xw (
    .clk, .we(xw_we), .waddr(xw_waddr), .wdata(xw_wdata), .raddr(xw_raddr), .rdata(xw_rdata)
  );

  // ------------------------------------------------- dot-product banks
  logic  p_valid, p_first, p_last, p_last_chunk;
  prec_t p_shamt;
  line_t p_line;
  logic      [BANKS-1:0] dot_valid;
  bank_vec_t             dot;

  always_ff @(posedge clk) begin
    if (!rst_n) p_valid <= 1'b0;
    else        p_valid <= accept;
  end
  always_ff @(posedge clk) begin
    if (accept) begin
      p_line       <= line_data;
      p_first      <= (fr_i == '0);
      p_last       <= fr_last_b;
      p_last_chunk <= fr_last_c;
      p_shamt      <= fr_i + 1'b1;
    end
  end

  for (genvar k = 0; k < int'(BANKS); k++) begin : g_bank
    mlw_dot_bank u_dot (
      .clk, .rst_n,
      .in_valid  (p_valid),
      .first_bit (p_first),
      .last_bit  (p_last),
      .last_chunk(p_last_chunk),
      .shamt     (p_shamt),
      .bits      (p_line[k*LANES +: LANES]),
      .model     (x_rdata),
      .dot_valid (dot_valid[k]),
      .dot       (dot[k])
    );
  end

  // ------------------------------------------------- labels and serial part
  bank_vec_t lq_head, sq_in, sq_head;
  logic      sp_valid, sq_pop;

  mlw_fifo #(.WIDTH(BANKS*W), .DEPTH(Q_DEPTH)) u_lblq (
    .clk, .rst_n,
    .push (lbl_ready),
    .din  (lbl_data),
    .pop  (dot_valid[0]),
    .dout (lq_head),
    .full (lq_full),
    .empty(lq_empty),
    .count()
  );

  mlw_serial_part u_serial (
    .clk, .rst_n,
    .in_valid (dot_valid[0]),
    .dot,
    .label    (lq_head),
    .loss     (loss_q),
    .lr_shift (cur_lr),
    .out_valid(sp_valid),
    .scale    (sq_in)
  );

  mlw_fifo #(.WIDTH(BANKS*W), .DEPTH(Q_DEPTH)) u_scaleq (
    .clk, .rst_n,
    .push (sp_valid),
    .din  (sq_in),
    .pop  (sq_pop),
    .dout (sq_head),
    .full (sq_full),
    .empty(sq_empty),
    .count()
  );

  always_ff @(posedge clk) begin
    if (!rst_n || epoch_start) inflight <= '0;
    else if (lbl_ready && !sq_pop) inflight <= inflight + 1'b1;
    else if (!lbl_ready && sq_pop) inflight <= inflight - 1'b1;
  end

  // ------------------------------------------------- sample FIFO and gradients
  line_t      f_head;
  logic       f_pop;
  logic       g_valid, g_last_chunk, g_commit;
  chunk_t     g_sum;
  chunk_idx_t g_chunk;

  mlw_fifo #(.WIDTH(CL_BITS), .DEPTH(FIFO_DEPTH)) u_sfifo (
    .clk, .rst_n,
    .push (accept),
    .din  (line_data),
    .pop  (f_pop),
    .dout (f_head),
    .full (fifo_full),
    .empty(fifo_empty),
    .count()
  );

  mlw_grad_stage u_grad (
    .clk, .rst_n,
    .init         (epoch_start),
    .prec         (cur_prec),
    .chunks       (chunks_q),
    .grp_per_batch(gpb_q),
    .scale_valid  (!sq_empty),
    .scale        (sq_head),
    .scale_pop    (sq_pop),
    .line_avail   (!fifo_empty),
    .line         (f_head),
    .line_pop     (f_pop),
    .g_valid, .g_sum, .g_chunk, .g_last_chunk, .g_commit,
    .busy         ()
  );

  // ------------------------------------------------- model update and hazards
  logic commit_first, commit_last, group_done, bypass_hit;

  mlw_model_update u_update (
    .clk, .rst_n,
    .g_valid, .g_sum, .g_chunk, .g_last_chunk, .g_commit,
    .xw_raddr,
    .xw_rdata,
    .xw_we   (u_xw_we),
    .xw_waddr(u_xw_waddr),
    .xw_wdata(u_xw_wdata),
    .x_we    (u_x_we),
    .x_waddr (u_x_waddr),
    .x_wdata (u_x_wdata),
    .commit_first, .commit_last, .group_done, .bypass_hit
  );

  mlw_hazard_ctrl u_hazard (
    .clk, .rst_n,
    .init        (epoch_start),
    .batch       (batch_q),
    .chaining    (chaining_q),
    .rd_grant,
    .rd_take     (lbl_ready),
    .rd_chunk    (fr_c),
    .chunk_ok,
    .x_we        (u_x_we),
    .x_waddr     (u_x_waddr),
    .commit_first, .commit_last,
    .rd_counter  (),
    .wr_counter  ()
  );

  // epoch ends when every group's update has been written
  logic [31:0] groups_done;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      groups_done <= '0;
      epoch_done  <= 1'b0;
    end else begin
      epoch_done <= 1'b0;
      if (epoch_start) groups_done <= '0;
      else if (group_done) begin
        groups_done <= groups_done + 1'b1;
        if (groups_done + 1'b1 == groups_q) epoch_done <= 1'b1;
      end
    end
  end

  // ------------------------------------------------- event counters
  always_ff @(posedge clk) begin
    if (!rst_n || job_start) begin
      stats <= '0;
    end else begin
      if (accept)       stats.lines   <= stats.lines + 1'b1;
      if (lbl_ready)    stats.groups  <= stats.groups + 1'b1;
      if (fr_active && fr_grp_start && line_valid && lbl_valid && !rd_grant)
                        stats.raw_stall <= stats.raw_stall + 1'b1;
      if (fr_active && line_valid && !chunk_ok)
                        stats.guard_stall <= stats.guard_stall + 1'b1;
      if (fr_active && line_valid && fifo_full)
                        stats.fifo_stall <= stats.fifo_stall + 1'b1;
      if (commit_last)  stats.commits <= stats.commits + 1'b1;
      if (bypass_hit)   stats.bypass  <= stats.bypass + 1'b1;
    end
  end

  // the eight banks run in lock step
  a_banks_in_step:  assert property (@(posedge clk) disable iff (!rst_n) dot_valid == {BANKS{dot_valid[0]}});
  a_sq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(sp_valid && sq_full));
  a_lq_has_label:   assert property (@(posedge clk) disable iff (!rst_n) dot_valid[0] |-> !lq_empty);

endmodule
