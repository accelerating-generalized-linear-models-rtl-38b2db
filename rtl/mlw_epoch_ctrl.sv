// mlw_epoch_ctrl: runs the epochs of a training job.
//
// Training makes E passes (epochs) over the dataset. Before each epoch this
// controller fixes the two per-epoch knobs and pulses epoch_start:
//  * precision s: either the fixed value, or the dynamic schedule that starts
//    coarse and adds bits as training converges (2 bits for epochs 1-4,
//    3 for 5-8, 4 for 9-16, 5 for 17-32, and so on, up to 32);
//  * learning-rate shift: lambda = 2^-lr_shift for epochs 1..alpha and half
//    of it (one more bit of shift) afterwards.
// It then waits for epoch_done (all updates of the epoch written) before the
// next epoch, and raises done after epoch E.
//
// Interface: start (while idle) latches the settings. cur_epoch counts from 1.
// The two schedules are the published ones; running them in hardware and
// draining the pipeline between epochs are this design's choices.
module mlw_epoch_ctrl
  import mlw_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] epochs,
  input  logic        adaptive,
  input  prec_t       prec_fixed,
  input  prec_t       lr_shift,
  input  logic [15:0] alpha,
  output logic        epoch_start,
  input  logic        epoch_done,
  output prec_t       cur_prec,
  output prec_t       cur_lr_shift,
  output logic [15:0] cur_epoch,
  output logic        busy,
  output logic        done
);

  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_RUN} state_e;

  state_e      state;
  logic [15:0] epochs_q, alpha_q;
  logic        adaptive_q;
  prec_t       prec_q, lr_q;

  function automatic prec_t clamp_prec(input prec_t p);
    if (p == 0)     return prec_t'(1);
    if (int'(p) > int'(S_MAX)) return prec_t'(S_MAX);
    return p;
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      epoch_start  <= 1'b0;
      done         <= 1'b0;
      cur_epoch    <= '0;
      cur_prec     <= '0;
      cur_lr_shift <= '0;
      epochs_q     <= '0;
      alpha_q      <= '0;
      adaptive_q   <= 1'b0;
      prec_q       <= '0;
      lr_q         <= '0;
    end else begin
      epoch_start <= 1'b0;
      done        <= 1'b0;
      case (state)
        S_IDLE: if (start && epochs != 0) begin
          epochs_q   <= epochs;
          alpha_q    <= alpha;
          adaptive_q <= adaptive;
          prec_q     <= clamp_prec(prec_fixed);
          lr_q       <= lr_shift;
          cur_epoch  <= 16'd1;
          state      <= S_LAUNCH;
        end
        S_LAUNCH: begin
          cur_prec     <= adaptive_q ? sched_prec(cur_epoch) : prec_q;
          cur_lr_shift <= (cur_epoch > alpha_q) ? lr_q + 1'b1 : lr_q;
          epoch_start  <= 1'b1;
          state        <= S_RUN;
        end
        S_RUN: if (epoch_done) begin
          if (cur_epoch == epochs_q) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            cur_epoch <= cur_epoch + 1'b1;
            state     <= S_LAUNCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
