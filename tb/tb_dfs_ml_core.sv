// tb_dfs_ml_core: end-to-end test of the DFS core at its default size
// (100 trees, three classes, replay penalty 4).
//
// Around the core the testbench builds:
//   * adaptive_clock_model, which runs each cycle at the period the core asks
//     for, and a shadow clock 1.4 ns after every rising edge;
//   * a timed model of the host Execute stage: for each issued instruction it
//     computes the result and drives it onto the Execute output node after a
//     propagation delay that depends on the operation and its operands
//     (type 0: 1.6 ns, or 2.3 ns when operand 2 has bit 31 set; type 1:
//     2.4 ns, or 3.0 ns when both operands have bit 31 set; type 2: 3.8 ns).
//     Every delay exceeds the shadow delay (short-path bound of the detector).
// The forest is programmed with 60 trees that classify by type
// (0 -> class 0, 1 -> class 1, otherwise class 2) and 40 trees that vote on
// operand 2; the type rule always wins, so the slow cases of types 0 and 1
// are misclassified and must be caught and replayed.
//
// Checks: every result leaves in program order with the right value; a result
// flagged as a timing error really had a delay above its period; each cycle
// has the period of its instruction's class, or the worst case during a
// replay; the measured clock period matches the requested one. Counted and
// required at least once: each of the three classes, a timing error, a replay
// at the worst-case period, a Decode stall, a host bubble, a non-zero operand
// toggle and previous-output feature. Prints the speed-up over a fixed 4.0 ns
// clock for the run.
`timescale 1ns/1ps
module tb_dfs_ml_core;
  import dfs_pkg::*;

  localparam int N_INSTR = 3000;
  localparam int NT      = 100;

  logic enable = 1'b0, rst_n = 1'b0;
  logic clk, clk_shadow;
  tree_cfg_t cfg;
  logic id_valid, id_stall, ex_valid, res_valid, res_err, replay_active, replay_start;
  instr_t id_instr, ex_instr;
  logic [CLS_W-1:0] ex_cls, period_sel;
  logic [DATA_W-1:0] ex_result, res_data;
  logic [TAG_W-1:0] res_tag;
  logic [PERIOD_W-1:0] period_ps;

  int checks = 0, failures = 0;

  dfs_ml_core dut (.*);

  adaptive_clock_model u_clk (.enable, .period_ps, .clk, .clk_shadow);

  // ---------------------------------------------------------------- helpers
  function automatic logic [DATA_W-1:0] exe_value(input instr_t i);
    case (i.itype)
      12'd0:   return i.op1 & i.op2;
      12'd1:   return i.op1 + i.op2;
      default: return i.op1 * i.op2;
    endcase
  endfunction

  function automatic int exe_delay_ps(input instr_t i);
    case (i.itype)
      12'd0:   return i.op2[31] ? 2300 : 1600;
      12'd1:   return (i.op1[31] && i.op2[31]) ? 3000 : 2400;
      default: return 3800;
    endcase
  endfunction

  function automatic int predicted_class(input instr_t i);
    return (i.itype == 12'd0) ? 0 : ((i.itype == 12'd1) ? 1 : 2);
  endfunction

  function automatic int period_of(input int c);
    case (c)
      0:       return 1800;
      1:       return 2600;
      default: return 4000;
    endcase
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("t=%0t %s", $time, what);
    end
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- Execute model
  typedef struct {
    logic   valid;
    instr_t instr;
    logic [DATA_W-1:0] value;
    int     delay_ps;
    int     period;
    logic   replay;
  } launch_t;

  launch_t l0, l1;
  initial begin
    ex_result = '0;
    l0 = '{valid: 1'b0, instr: '0, value: '0, delay_ps: 0, period: 0, replay: 1'b0};
    l1 = l0;
  end

  // mechanism counters
  int n_cls [3] = '{0, 0, 0};
  int n_err = 0, n_replay = 0, n_worst = 0, n_stall = 0, n_bubble = 0;
  int n_tgl = 0, n_prev = 0, n_res = 0, n_cycles = 0;
  realtime t_start, t_last_edge;
  int last_period;

  // scoreboard of instructions in program order
  instr_t sent[$];

  always @(posedge clk) begin
    if (rst_n) begin
      // results captured at the previous edge belong to launch l1
      if (res_valid) begin
        chk(l1.valid && res_tag == l1.instr.tag, "result does not match the launched instruction");
        if (res_err) begin
          n_err++;
          chk(l1.delay_ps > l1.period, "timing error flagged on an instruction that met its period");
          chk(sent.size() != 0 && sent[0].tag == res_tag, "erroneous result out of order");
        end else begin
          n_res++;
          if (res_data != 0) n_prev++;
          chk(res_data == l1.value, $sformatf("result %h expected %h", res_data, l1.value));
          if (sent.size() != 0) begin
            chk(sent[0].tag == res_tag && exe_value(sent[0]) == res_data, "result out of program order");
            void'(sent.pop_front());
          end else chk(1'b0, "result with nothing outstanding");
        end
      end
      // measured period of the cycle that just ended
      if (n_cycles > 0) chk($realtime - t_last_edge > (last_period - 2) / 1000.0 &&
                            $realtime - t_last_edge < (last_period + 2) / 1000.0, "clock period");
      n_cycles++;
      t_last_edge = $realtime;
      if (id_stall) n_stall++;
      if (replay_start) n_replay++;
      l1 = l0;
    end
  end

  // launch: just after the edge the issue register holds the new instruction
  always @(posedge clk) begin
    #0.001;
    last_period = int'(period_ps);
    if (rst_n) begin
      l0.valid = ex_valid;
      l0.period = int'(period_ps);
      l0.replay = replay_active;
      if (replay_active) n_worst++;
      if (!ex_valid && !replay_active) n_bubble++;
      if (ex_valid) begin
        automatic instr_t i = ex_instr;
        automatic logic [DATA_W-1:0] v = exe_value(i);
        automatic int d = exe_delay_ps(i);
        l0.instr = i;
        l0.value = v;
        l0.delay_ps = d;
        n_cls[period_sel]++;
        chk(int'(period_ps) == (replay_active ? 4000 : period_of(predicted_class(i))), "period of class");
        chk(ex_cls == CLS_W'(predicted_class(i)), "class from the forest");
        fork
          begin
            #((d - 1) / 1000.0) ex_result = v;
          end
        join_none
      end
    end
  end

  // history activity seen from the ports: operand toggles between
  // consecutive issued instructions and non-zero results fed back as the
  // previous-output feature
  logic [DATA_W-1:0] last_op1 = '0;
  always @(posedge clk) begin
    #0.001;
    if (rst_n && ex_valid) begin
      if ((ex_instr.op1 ^ last_op1) != 0) n_tgl++;
      last_op1 = ex_instr.op1;
    end
  end

  // ---------------------------------------------------------------- stimulus
  task automatic cfg_write(input int tr, input int node, input feature_e f, input logic [DATA_W-1:0] thr);
    @(negedge clk);
    cfg.we   = 1'b1;
    cfg.tree = 8'(tr);
    cfg.node = 8'(node);
    cfg.fsel = f;
    cfg.thr  = thr;
  endtask

  task automatic program_forest();
    for (int tr = 0; tr < NT; tr++) begin
      for (int k = 0; k < 15; k++) begin
        if (tr < 60) begin
          if (k == 0)      cfg_write(tr, k, F_TYPE, 32'd0);
          else if (k == 2) cfg_write(tr, k, F_TYPE, 32'd1);
          else             cfg_write(tr, k, F_TYPE, '1);
        end else begin
          if (k == 0) cfg_write(tr, k, F_OP2, 32'h7FFF_FFFF);
          else        cfg_write(tr, k, F_TYPE, '1);
        end
      end
      for (int k = 0; k < 16; k++) begin
        int c;
        if (tr < 60) c = (k < 8) ? 0 : ((k < 12) ? 1 : 2);
        else         c = (k < 8) ? 0 : 1;
        cfg_write(tr, 15 + k, F_TYPE, DATA_W'(c));
      end
    end
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // Decode hand-off happens at the rising edge: sample it there, since the
  // stall can rise late in the cycle (after the shadow edge).
  logic taken = 1'b0;
  always @(posedge clk) taken = id_valid && !id_stall;

  initial begin
    int sent_n;
    realtime t0;
    cfg = '0;
    id_valid = 1'b0;
    id_instr = '0;
    enable = 1'b1;
    repeat (3) @(posedge clk);
    #0.2 rst_n = 1'b1;
    program_forest();
    repeat (4) @(negedge clk);
    t0 = $realtime;
    n_cycles = 0;
    sent_n = 0;
    while (sent_n < N_INSTR) begin
      @(negedge clk);
      if (taken || !id_valid) begin
        // previous one was taken (or there was none): offer the next
        if (taken) begin
          sent.push_back(id_instr);
          sent_n++;
        end
        id_valid = ($urandom_range(0, 9) != 0) && sent_n < N_INSTR;
        id_instr.itype = TYPE_W'($urandom_range(0, 2));
        id_instr.op1   = $urandom;
        id_instr.op2   = $urandom;
        id_instr.tag   = TAG_W'(sent_n);
      end
    end
    id_valid = 1'b0;
    repeat (20) @(negedge clk);
    chk(sent.size() == 0, $sformatf("%0d instructions never completed", sent.size()));
    chk(n_res == N_INSTR, $sformatf("completed %0d of %0d", n_res, N_INSTR));
    // the same stream on a fixed 4.0 ns clock needs no replay cycles
    $display("cycles=%0d time=%0.1f ns, fixed 4.0 ns clock would need %0.1f ns: speed-up %0.2f",
             n_cycles, $realtime - t0, (n_cycles - 4 * n_err) * 4.0,
             ((n_cycles - 4 * n_err) * 4.0) / ($realtime - t0));
    $display("class use %0d/%0d/%0d, timing errors %0d, replays %0d, worst-case cycles %0d, stalls %0d, bubbles %0d, toggles %0d, prev-out %0d",
             n_cls[0], n_cls[1], n_cls[2], n_err, n_replay, n_worst, n_stall, n_bubble, n_tgl, n_prev);
    chk(n_cls[0] > 0, "class 0 never used");
    chk(n_cls[1] > 0, "class 1 never used");
    chk(n_cls[2] > 0, "class 2 never used");
    chk(n_err > 0, "no timing error");
    chk(n_replay > 0 && n_replay == n_err, "replays do not match timing errors");
    chk(n_worst > 0, "no worst-case replay cycle");
    chk(n_stall > 0, "no Decode stall");
    chk(n_bubble > 0, "no host bubble");
    chk(n_tgl > 0 && n_prev > 0, "history features never active");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
