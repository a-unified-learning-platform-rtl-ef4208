// tb_feature_extract: self-checking test of the six-feature builder.
// Random operands, types, history and result writes are applied; a model kept
// in the testbench (previous operands, previous result) predicts every
// feature, which is compared each cycle.
`timescale 1ns/1ps
module tb_feature_extract;
  import dfs_pkg::*;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic [TYPE_W-1:0] cur_type;
  logic [DATA_W-1:0] cur_op1, cur_op2, hist_op1, hist_op2, res_data;
  logic              hist_we, res_we;
  feat_vec_t         feat;
  int checks = 0, failures = 0;
  logic [DATA_W-1:0] m_op1, m_op2, m_res;

  feature_extract dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int f, input logic [DATA_W-1:0] exp);
    checks++;
    if (feat[f] !== exp) begin
      failures++;
      $display("feature %0d: got %h expected %h", f, feat[f], exp);
    end
  endtask

  initial begin
    {cur_type, cur_op1, cur_op2, hist_op1, hist_op2, res_data, hist_we, res_we} = '0;
    m_op1 = '0; m_op2 = '0; m_res = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      cur_type = TYPE_W'($urandom);
      cur_op1  = $urandom;
      cur_op2  = (n % 7 == 0) ? m_op2 : $urandom;  // some zero-toggle cases
      #1;
      check(F_TYPE, DATA_W'(cur_type));
      check(F_OP1, cur_op1);
      check(F_OP2, cur_op2);
      check(F_TGL1, cur_op1 ^ m_op1);
      check(F_TGL2, cur_op2 ^ m_op2);
      check(F_PREV_OUT, m_res);
      hist_we  = $urandom_range(0, 3) != 0;
      hist_op1 = $urandom;
      hist_op2 = $urandom;
      res_we   = $urandom_range(0, 1) != 0;
      res_data = $urandom;
      @(posedge clk);
      if (hist_we) begin m_op1 = hist_op1; m_op2 = hist_op2; end
      if (res_we) m_res = res_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
