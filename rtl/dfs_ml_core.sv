// dfs_ml_core: ML-driven dynamic frequency scaling core for a pipelined MIPS.
//
// The core is inserted between the Decode and Execute stages of the host
// pipeline. Each instruction spends one cycle in the ML stage, where a Random
// Forest classifies its propagation delay from its type, its operands, the
// operand bit toggles and the previous Execute output. The class travels with
// the instruction into the Execute issue register, and freq_select turns it
// into the period of the cycle in which the instruction executes; an external
// adaptive clock generator is expected to switch to that period at once. The
// Execute output is double-sampled; a timing error makes replay_ctrl squash
// the next instruction and re-issue the failed one at the worst-case period,
// costing REPLAY_PENALTY cycles.
//
// Following the paper: the extra ML pipeline stage, the six features, the
// Random Forest with its tree and class counts, per-instruction period
// selection with the published class boundaries, double sampling and replay
// at the worst-case period with a four-cycle penalty. This design's own
// choices: programmable trees, the issue/replay protocol, the shadow-register
// error detector and the port list below.
//
// Ports (all synchronous to clk, rising edge, active-low async reset):
//   cfg                     forest programming, one node per cycle
//   id_valid/id_instr       instruction from Decode; id_stall holds Decode
//   ex_valid/ex_instr/ex_cls  Execute inputs (issue register)
//   ex_result               Execute output node (combinational result)
//   res_valid/res_data/res_tag  result towards Memory; res_err (valid late in
//                           the cycle, after clk_shadow) marks it wrong: the
//                           Memory stage must drop it, the instruction is replayed
//   period_sel/period_ps    operating point for the clock generator this cycle
//   replay_active           a replay is under way (worst-case period forced)
//   replay_start            pulses when a timing error is acted on
module dfs_ml_core
  import dfs_pkg::*;
#(
  parameter int unsigned NUM_TREES      = 100,
  parameter int unsigned NUM_CLASSES    = 3,
  parameter int unsigned TREE_DEPTH     = 4,
  parameter int unsigned REPLAY_PENALTY = 4
) (
  input  logic                clk,
  input  logic                clk_shadow,
  input  logic                rst_n,
  input  tree_cfg_t           cfg,
  input  logic                id_valid,
  input  instr_t              id_instr,
  output logic                id_stall,
  output logic                ex_valid,
  output instr_t              ex_instr,
  output logic [CLS_W-1:0]    ex_cls,
  input  logic [DATA_W-1:0]   ex_result,
  output logic                res_valid,
  output logic [DATA_W-1:0]   res_data,
  output logic [TAG_W-1:0]    res_tag,
  output logic                res_err,
  output logic [CLS_W-1:0]    period_sel,
  output logic [PERIOD_W-1:0] period_ps,
  output logic                replay_active,
  output logic                replay_start
);

  logic             ml_valid, ml_stall, squash, force_worst, issue_we;
  instr_t           ml_instr, issue_instr;
  logic [CLS_W-1:0] ml_cls;
  logic             err;

  ml_stage #(
    .NUM_TREES  (NUM_TREES),
    .NUM_CLASSES(NUM_CLASSES),
    .TREE_DEPTH (TREE_DEPTH)
  ) u_ml (
    .clk      (clk),
    .rst_n    (rst_n),
    .stall    (ml_stall),
    .in_valid (id_valid),
    .in_instr (id_instr),
    .hist_we  (issue_we),
    .hist_op1 (issue_instr.op1),
    .hist_op2 (issue_instr.op2),
    .res_we   (res_valid && !err),
    .res_data (res_data),
    .cfg      (cfg),
    .out_valid(ml_valid),
    .out_instr(ml_instr),
    .out_cls  (ml_cls)
  );

  replay_ctrl #(
    .REPLAY_PENALTY(REPLAY_PENALTY)
  ) u_replay (
    .clk         (clk),
    .rst_n       (rst_n),
    .ml_valid    (ml_valid),
    .ml_instr    (ml_instr),
    .ml_cls      (ml_cls),
    .err         (err),
    .ml_stall    (ml_stall),
    .squash      (squash),
    .replay_start(replay_start),
    .force_worst (force_worst),
    .issue_we    (issue_we),
    .issue_instr (issue_instr),
    .ex_valid    (ex_valid),
    .ex_instr    (ex_instr),
    .ex_cls      (ex_cls)
  );

  freq_select #(
    .NUM_CLASSES(NUM_CLASSES)
  ) u_freq (
    .ex_valid   (ex_valid),
    .ex_cls     (ex_cls),
    .force_worst(force_worst),
    .period_sel (period_sel),
    .period_ps  (period_ps)
  );

  double_sampler u_dsamp (
    .clk       (clk),
    .clk_shadow(clk_shadow),
    .rst_n     (rst_n),
    .d         (ex_result),
    .in_valid  (ex_valid && !squash),
    .q         (res_data),
    .q_valid   (res_valid),
    .err       (err)
  );

  // Tag travels alongside the main sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_tag <= '0;
    else        res_tag <= ex_instr.tag;
  end

  assign id_stall      = ml_stall;
  assign res_err       = err;
  assign replay_active = force_worst;

endmodule
