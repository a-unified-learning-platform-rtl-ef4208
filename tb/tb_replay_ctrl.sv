// tb_replay_ctrl: checks the Execute issue register and the replay sequence.
// A source stands in for the ML stage (instructions with increasing tags,
// occasional bubbles, held while ml_stall is high). Timing errors are injected
// on random live instructions. A queue model in the testbench predicts, cycle
// by cycle, what Execute holds, the stall, squash and worst-case-period
// outputs. A directed case on a bubble-free stream checks the replay penalty:
// instruction i+2 must reach Execute exactly four cycles later than it would
// without the error.
`timescale 1ns/1ps
module tb_replay_ctrl;
  import dfs_pkg::*;

  localparam int P = 4;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    logic [CLS_W-1:0] cls;
  } mslot_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ml_valid, err;
  instr_t ml_instr;
  logic [CLS_W-1:0] ml_cls;
  logic ml_stall, squash, replay_start, force_worst, issue_we, ex_valid;
  instr_t issue_instr, ex_instr;
  logic [CLS_W-1:0] ex_cls;
  int checks = 0, failures = 0, replays = 0;

  replay_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  mslot_t m_ex, m_prev, q[$];
  logic   m_fw;
  int     next_tag;
  logic   bubbles_on;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("t=%0t %s", $time, what); end
  endtask

  function automatic void drive_source();
    ml_valid       = bubbles_on ? ($urandom_range(0, 5) != 0) : 1'b1;
    ml_instr       = '0;
    ml_instr.tag   = TAG_W'(next_tag);
    ml_instr.op1   = 32'(next_tag) * 32'd7;
    ml_instr.op2   = ~32'(next_tag);
    ml_cls         = CLS_W'(next_tag % 3);
  endfunction

  // One clock cycle: drive err, check combinational outputs, step the model.
  task automatic cycle(input logic inject);
    mslot_t ml;
    logic   m_stall;
    @(negedge clk);
    drive_source();
    err = inject && m_prev.valid && q.size() == 0 && !m_fw;
    #1;
    m_stall = err || q.size() != 0;
    chk(ml_stall == m_stall, "ml_stall");
    chk(squash == err && replay_start == err, "squash/replay_start");
    chk(force_worst == m_fw, "force_worst");
    ml = '{valid: ml_valid, tag: ml_instr.tag, cls: ml_cls};
    @(posedge clk);
    if (err) begin
      replays++;
      for (int b = 0; b < P - 2; b++) q.push_back('{valid: 1'b0, tag: m_ex.tag, cls: m_ex.cls});
      q.push_back(m_prev);
      q.push_back(m_ex);
    end
    m_prev = m_ex;
    if (q.size() != 0) begin
      mslot_t s = q.pop_front();
      if (s.valid) m_ex = s;
      else m_ex.valid = 1'b0;
      m_fw = 1'b1;
    end else begin
      m_fw = 1'b0;
      m_ex.valid = ml.valid;
      if (ml.valid) begin m_ex.tag = ml.tag; m_ex.cls = ml.cls; end
    end
    if (!m_stall && ml.valid) next_tag++;
    #1;
    chk(ex_valid == m_ex.valid, "ex_valid");
    if (m_ex.valid) chk(ex_instr.tag == m_ex.tag && ex_cls == m_ex.cls, "ex tag/class");
  endtask

  initial begin
    int err_cycle, tag_i2, seen;
    err = 1'b0; next_tag = 0; bubbles_on = 1'b1;
    m_ex = '0; m_prev = '0; m_fw = 1'b0;
    drive_source();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) cycle($urandom_range(0, 9) == 0);
    // directed penalty check, no source bubbles
    bubbles_on = 1'b0;
    repeat (8) cycle(1'b0);
    cycle(1'b1);                       // error on prev (i), i+1 in Execute
    tag_i2 = int'(ex_instr.tag) + 1;   // i+2 sits in the ML stage
    seen = 0;
    for (int k = 1; k <= 8; k++) begin
      cycle(1'b0);
      if (ex_valid && int'(ex_instr.tag) == tag_i2 && seen == 0) seen = k;
    end
    // without the error i+2 would have entered Execute at the edge that ends
    // the error cycle (k = 0)
    chk(seen == P, $sformatf("replay penalty: i+2 after %0d cycles", seen));
    chk(replays > 50, "enough replays exercised");
    $display("replays=%0d", replays);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
