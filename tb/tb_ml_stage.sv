// tb_ml_stage: checks the ML classifier pipeline stage (five trees to keep the
// run short). For each of the six features in turn, all trees are loaded with
// a single split on that feature at a random threshold (left leaves class 0,
// right leaves class 1). A random instruction stream with random stalls,
// operand-history and result writes is applied; the testbench keeps its own
// copy of the stage register and the history and checks the held instruction
// and its class every cycle, which also shows that each feature reaches the
// forest with the right value.
`timescale 1ns/1ps
module tb_ml_stage;
  import dfs_pkg::*;

  localparam int NT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic stall, in_valid, hist_we, res_we;
  instr_t in_instr;
  logic [DATA_W-1:0] hist_op1, hist_op2, res_data;
  tree_cfg_t cfg;
  logic out_valid;
  instr_t out_instr;
  logic [CLS_W-1:0] out_cls;
  int checks = 0, failures = 0;

  ml_stage #(.NUM_TREES(NT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_split(input int f, input logic [DATA_W-1:0] t);
    for (int tr = 0; tr < NT; tr++)
      for (int k = 0; k < 31; k++) begin
        @(negedge clk);
        cfg.we   = 1'b1;
        cfg.tree = 8'(tr);
        cfg.node = 8'(k);
        cfg.fsel = (k == 0) ? feature_e'(f) : F_TYPE;
        cfg.thr  = (k == 0) ? t : (k < 15 ? '1 : ((k - 15) >= 8 ? 32'd1 : 32'd0));
      end
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  logic              m_valid;
  instr_t            m_instr;
  logic [DATA_W-1:0] m_p1, m_p2, m_res;

  function automatic logic [DATA_W-1:0] model_feat(input int f);
    case (f)
      0:       return DATA_W'(m_instr.itype);
      1:       return m_instr.op1;
      2:       return m_instr.op2;
      3:       return m_instr.op1 ^ m_p1;
      4:       return m_instr.op2 ^ m_p2;
      default: return m_res;
    endcase
  endfunction

  initial begin
    logic [DATA_W-1:0] thr;
    cfg = '0;
    {stall, in_valid, hist_we, res_we, hist_op1, hist_op2, res_data} = '0;
    in_instr = '0;
    m_valid = 1'b0; m_instr = '0; m_p1 = '0; m_p2 = '0; m_res = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NUM_FEATURES; f++) begin
      // thresholds near the middle of each feature's range
      thr = (f == 0) ? DATA_W'(2048) : 32'h8000_0000;
      load_split(f, thr);
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        stall          = $urandom_range(0, 3) == 0;
        in_valid       = $urandom_range(0, 4) != 0;
        in_instr.itype = TYPE_W'($urandom);
        in_instr.op1   = $urandom;
        in_instr.op2   = $urandom;
        in_instr.tag   = TAG_W'(n);
        hist_we        = $urandom_range(0, 1) != 0;
        hist_op1       = $urandom;
        hist_op2       = $urandom;
        res_we         = $urandom_range(0, 1) != 0;
        res_data       = $urandom;
        @(posedge clk);
        if (!stall) begin m_valid = in_valid; m_instr = in_instr; end
        if (hist_we) begin m_p1 = hist_op1; m_p2 = hist_op2; end
        if (res_we) m_res = res_data;
        #1;
        checks++;
        if (out_valid !== m_valid || out_instr !== m_instr) begin
          failures++;
          $display("f=%0d n=%0d stage register mismatch", f, n);
        end
        checks++;
        if (32'(out_cls) != 32'(model_feat(f) > thr)) begin
          failures++;
          $display("f=%0d n=%0d class %0d expected %0d", f, n, out_cls, model_feat(f) > thr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
