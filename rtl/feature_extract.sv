// feature_extract: builds the six ML features of the classifier stage.
//
// Features are the current instruction type and its two operands, the bit
// toggles of each operand against the operands of the instruction last issued
// to Execute (current XOR previous), and the last Execute output. The XOR
// toggles and the six-feature set follow the paper; the paper does not say
// which "previous output" is meant, so this design uses the latest result that
// left Execute without a timing error, which, because the ML stage runs one
// cycle ahead of Execute, is the result of the instruction two ahead.
//
// Interface: cur_* is the instruction held in the ML stage (combinational
// path to feat). hist_we/hist_op* are the operands being loaded into the
// Execute issue register this cycle; res_we/res_data is a completed result.
// Both history registers update at the rising clock edge and reset to zero.
module feature_extract
  import dfs_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TYPE_W-1:0] cur_type,
  input  logic [DATA_W-1:0] cur_op1,
  input  logic [DATA_W-1:0] cur_op2,
  input  logic              hist_we,
  input  logic [DATA_W-1:0] hist_op1,
  input  logic [DATA_W-1:0] hist_op2,
  input  logic              res_we,
  input  logic [DATA_W-1:0] res_data,
  output feat_vec_t         feat
);

  logic [DATA_W-1:0] prev_op1, prev_op2, prev_res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_op1 <= '0;
      prev_op2 <= '0;
      prev_res <= '0;
    end else begin
      if (hist_we) begin
        prev_op1 <= hist_op1;
        prev_op2 <= hist_op2;
      end
      if (res_we) prev_res <= res_data;
    end
  end

  always_comb begin
    feat[F_TYPE]     = DATA_W'(cur_type);
    feat[F_OP1]      = cur_op1;
    feat[F_OP2]      = cur_op2;
    feat[F_TGL1]     = cur_op1 ^ prev_op1;
    feat[F_TGL2]     = cur_op2 ^ prev_op2;
    feat[F_PREV_OUT] = prev_res;
  end

endmodule
