// replay_ctrl: Execute issue register and timing-error replay.
//
// Normally the instruction leaving the ML stage is loaded into the Execute
// issue register every cycle. When double_sampler reports a timing error for
// instruction i (detected one cycle after i executed, while i+1 is in
// Execute), the controller
//   * squashes i+1 (its sample is marked invalid),
//   * stalls the ML stage and Decode, which keep i+2,
//   * issues REPLAY_PENALTY-2 empty cycles, then re-issues i and i+1,
//   * holds the worst-case clock period (force_worst) from the first empty
//     cycle until i+1 has been re-issued,
// after which i+2 proceeds. Instruction i+2 thus enters Execute exactly
// REPLAY_PENALTY cycles later than without the error, the four-cycle replay
// penalty the paper assumes. Replay at the worst-case period follows the
// paper; the squash of i+1, the empty cycles that make up the penalty and the
// two-entry replay buffer are this design's own. An error reported while a
// replay is under way is ignored: replayed instructions run at the worst-case
// period and cannot fail timing.
//
// Interface: ml_* is the ML stage output; ml_stall holds it. ex_* is the
// issue register (Execute inputs); issue_we/issue_instr show what is loaded at
// the coming edge (for the operand history). squash clears the sample of the
// instruction in Execute. replay_start pulses in the cycle the error is acted on.
module replay_ctrl
  import dfs_pkg::*;
#(
  parameter int unsigned REPLAY_PENALTY = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ml_valid,
  input  instr_t           ml_instr,
  input  logic [CLS_W-1:0] ml_cls,
  input  logic             err,
  output logic             ml_stall,
  output logic             squash,
  output logic             replay_start,
  output logic             force_worst,
  output logic             issue_we,
  output instr_t           issue_instr,
  output logic             ex_valid,
  output instr_t           ex_instr,
  output logic [CLS_W-1:0] ex_cls
);

  localparam int unsigned N_BUBBLES = REPLAY_PENALTY - 2;
  localparam int unsigned CNT_W     = (N_BUBBLES > 1) ? $clog2(N_BUBBLES) : 1;

  typedef enum logic [1:0] {
    S_RUN     = 2'd0,  // normal issue
    S_BUBBLE  = 2'd1,  // empty cycles of the replay penalty
    S_REPLAY0 = 2'd2,  // failed instruction i is in Execute
    S_REPLAY1 = 2'd3   // squashed instruction i+1 is in Execute
  } state_e;

  typedef struct packed {
    logic             valid;
    instr_t           instr;
    logic [CLS_W-1:0] cls;
  } slot_t;

  state_e           state, state_n;
  logic [CNT_W-1:0] cnt, cnt_n;
  slot_t            ex, ex_n, prev, rp0, rp1;

  assign replay_start = (state == S_RUN) && err;
  assign squash       = replay_start;
  assign ml_stall     = replay_start || (state == S_BUBBLE) || (state == S_REPLAY0);
  assign force_worst  = (state != S_RUN);

  always_comb begin
    state_n = state;
    cnt_n   = cnt;
    ex_n    = ex;
    unique case (state)
      S_RUN: begin
        if (err) begin
          ex_n.valid = 1'b0;
          cnt_n      = CNT_W'(N_BUBBLES - 1);
          state_n    = S_BUBBLE;
        end else begin
          ex_n.valid = ml_valid;
          if (ml_valid) begin
            ex_n.instr = ml_instr;
            ex_n.cls   = ml_cls;
          end
        end
      end
      S_BUBBLE: begin
        if (cnt == '0) begin
          ex_n    = rp0;
          state_n = S_REPLAY0;
        end else begin
          ex_n.valid = 1'b0;
          cnt_n      = cnt - 1'b1;
        end
      end
      S_REPLAY0: begin
        ex_n    = rp1;
        state_n = S_REPLAY1;
      end
      S_REPLAY1: begin
        ex_n.valid = ml_valid;
        if (ml_valid) begin
          ex_n.instr = ml_instr;
          ex_n.cls   = ml_cls;
        end
        state_n = S_RUN;
      end
      default: state_n = S_RUN;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN;
      cnt   <= '0;
      ex    <= '0;
      prev  <= '0;
      rp0   <= '0;
      rp1   <= '0;
    end else begin
      state <= state_n;
      cnt   <= cnt_n;
      ex    <= ex_n;
      prev  <= ex;
      if (replay_start) begin
        rp0 <= prev;
        rp1 <= ex;
      end
    end
  end

  assign issue_we    = ex_n.valid;
  assign issue_instr = ex_n.instr;
  assign ex_valid    = ex.valid;
  assign ex_instr    = ex.instr;
  assign ex_cls      = ex.cls;

  // The penalty covers the squashed cycle and the two re-issues.
  initial assert (REPLAY_PENALTY >= 3)
    else $error("replay_ctrl: REPLAY_PENALTY must be at least 3");

  // A replay only starts for a live instruction that was really issued.
  assert property (@(posedge clk) disable iff (!rst_n) replay_start |-> prev.valid)
    else $error("replay_ctrl: timing error reported for an empty slot");

endmodule
