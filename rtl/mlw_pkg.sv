// mlw_pkg: sizes, types and helper functions shared by the MLWeaving SGD engine.
//
// The engine consumes 512-bit cache lines that each carry one bit plane of
// 64 features for each of 8 samples (8 banks x 64 lanes). The model is kept
// at 32-bit precision, up to 32K features, stored as 512 words of 64 values.
// These sizes are the ones the design was published with. FIFO depth, the
// fixed-point binary point and the loss encodings are this implementation's
// own choices.
package mlw_pkg;

  localparam int unsigned CL_BITS    = 512;                  // cache line
  localparam int unsigned BANKS      = 8;                    // samples processed in lock step
  localparam int unsigned LANES      = CL_BITS / BANKS;      // 64 features per bank per line
  localparam int unsigned W          = 32;                   // model / gradient precision
  localparam int unsigned S_MAX      = 32;                   // bits stored per feature value
  localparam int unsigned M_MAX      = 32768;                // largest model
  localparam int unsigned CHUNKS_MAX = M_MAX / LANES;        // 512 model words
  localparam int unsigned CHUNK_W    = $clog2(CHUNKS_MAX);   // 9
  localparam int unsigned PREC_W     = 6;                    // holds 1..32
  localparam int unsigned CNT_W      = 16;                   // rd/wr hazard counters
  localparam int unsigned ADDR_W     = 48;                   // cache-line address
  localparam int unsigned FRAC_BITS  = 24;                   // binary point of x, b, a.x

  typedef logic signed [W-1:0]  word_t;
  typedef word_t [LANES-1:0]    chunk_t;     // 64 model values = one 2048-bit model word
  typedef word_t [BANKS-1:0]    bank_vec_t;  // one value per bank
  typedef logic [CL_BITS-1:0]   line_t;
  typedef logic [CHUNK_W-1:0]   chunk_idx_t;
  typedef logic [PREC_W-1:0]    prec_t;

  // Loss functions whose derivative the serial part evaluates.
  typedef enum logic [0:0] {
    LOSS_LSQ   = 1'b0,   // least squares: df = a.x - b
    LOSS_HINGE = 1'b1    // SVM hinge:     df = -b if b*(a.x) < 1 else 0
  } loss_e;

  // Event counters of a training job, for observing the mechanisms at work.
  typedef struct packed {
    logic [31:0] lines;        // bit-plane lines consumed
    logic [31:0] groups;       // groups of 8 samples read
    logic [31:0] raw_stall;    // cycles a group waited for rd_counter != wr_counter
    logic [31:0] guard_stall;  // cycles the chunk guard held a read back
    logic [31:0] fifo_stall;   // cycles the sample FIFO was full
    logic [31:0] commits;      // mini-batch updates written to x
    logic [31:0] bypass;       // x_w reads served by forwarding
  } stats_t;

  localparam word_t FIX_ONE = word_t'(1) <<< FRAC_BITS;

  // Per-epoch precision schedule: 2 bits for epochs 1-4, 3 for 5-8,
  // 4 for 9-16, 5 for 17-32, ... i.e. max(2, ceil(log2 e)), capped at S_MAX.
  function automatic prec_t sched_prec(input logic [15:0] epoch);
    int unsigned p;
    p = 0;
    for (int k = 0; k < 16; k++)
      if ((32'd1 << k) < 32'(epoch)) p = k + 1;   // p = ceil(log2 epoch)
    if (p < 2) p = 2;
    if (p > S_MAX) p = S_MAX;
    return prec_t'(p);
  endfunction

endpackage
