// ml_stage: the additional ML classifier pipeline stage between Decode and
// Execute.
//
// The stage register captures the instruction bundle coming from Decode
// (type, operands, tag) whenever the stage is not stalled. During the cycle
// the instruction sits here, feature_extract forms the six features and
// rf_classifier turns them into a delay class, which leaves the stage together
// with the instruction. The placement between Decode and Execute, the six
// features and the Random Forest follow the paper; the stall port and the
// reset value (empty stage) are this design's choices.
//
// Interface: in_* from Decode, loaded at the rising edge when !stall;
// out_valid/out_instr/out_cls are the stage contents and its class
// (combinational from the stage register and history); hist_* and res_* feed
// the history registers (see feature_extract); cfg programs the forest.
// Latency: one cycle, throughput one instruction per cycle.
module ml_stage
  import dfs_pkg::*;
#(
  parameter int unsigned NUM_TREES   = 100,
  parameter int unsigned NUM_CLASSES = 3,
  parameter int unsigned TREE_DEPTH  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stall,
  input  logic              in_valid,
  input  instr_t            in_instr,
  input  logic              hist_we,
  input  logic [DATA_W-1:0] hist_op1,
  input  logic [DATA_W-1:0] hist_op2,
  input  logic              res_we,
  input  logic [DATA_W-1:0] res_data,
  input  tree_cfg_t         cfg,
  output logic              out_valid,
  output instr_t            out_instr,
  output logic [CLS_W-1:0]  out_cls
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_instr <= '0;
    end else if (!stall) begin
      out_valid <= in_valid;
      out_instr <= in_instr;
    end
  end

  feat_vec_t feat;

  feature_extract u_feat (
    .clk     (clk),
    .rst_n   (rst_n),
    .cur_type(out_instr.itype),
    .cur_op1 (out_instr.op1),
    .cur_op2 (out_instr.op2),
    .hist_we (hist_we),
    .hist_op1(hist_op1),
    .hist_op2(hist_op2),
    .res_we  (res_we),
    .res_data(res_data),
    .feat    (feat)
  );

  rf_classifier #(
    .NUM_TREES  (NUM_TREES),
    .NUM_CLASSES(NUM_CLASSES),
    .TREE_DEPTH (TREE_DEPTH)
  ) u_rf (
    .clk  (clk),
    .rst_n(rst_n),
    .cfg  (cfg),
    .feat (feat),
    .cls  (out_cls)
  );

endmodule
