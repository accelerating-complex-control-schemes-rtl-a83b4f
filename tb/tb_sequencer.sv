// tb_sequencer: runs a short program on the sequencer twice and checks the
// trigger bus cycle by cycle. The program fires pulse generator 0, waits 10
// clocks, fires the readout generator together with the recording module,
// waits for the qubit state (returned by this testbench 5 clocks after the
// recording trigger) and branches on it to fire generator 0 again with an
// argument that depends on the state. Checked: trigger targets and
// arguments, the spacing of WAIT (one 4 ns clock per count), the reaction
// time from state report to the conditional trigger, the busy flag, the
// relaxation flag before and after the programmed delay, the run counter,
// and a state report that arrives before WAIT_STATE is reached.
module tb_sequencer;
  import qc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  axil_req_t  axi_req;
  axil_rsp_t  axi_rsp;
  trig_t      trig_pg0, trig_pg1, trig_rec;
  state_rpt_t state_in;
  logic       busy;

  sequencer dut (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .trig_pg0, .trig_pg1, .trig_rec, .state_in, .busy
  );

  `include "axil_tasks.svh"

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- trigger monitor ----
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { longint t; int unit; logic [31:0] arg; } ev_t;
  ev_t events[$];
  int  state_delay = 5;
  logic next_state = 1'b0;

  always @(posedge clk) begin
    if (trig_pg0.valid) events.push_back('{cyc, 0, trig_pg0.arg});
    if (trig_pg1.valid) events.push_back('{cyc, 1, trig_pg1.arg});
    if (trig_rec.valid) events.push_back('{cyc, 2, trig_rec.arg});
  end

  // qubit-state responder: report next_state state_delay clocks after a
  // recording trigger
  initial begin
    state_in = '0;
    forever begin
      @(posedge clk);
      if (trig_rec.valid) begin
        repeat (state_delay - 1) @(posedge clk);
        @(negedge clk);
        state_in = '{valid: 1'b1, state: next_state};
        @(negedge clk);
        state_in = '0;
      end
    end
  end

  function automatic logic [63:0] mk(opcode_e op, logic [27:0] a, logic [31:0] b);
    instr_t i;
    i.op = op; i.a = a; i.b = b;
    return 64'(i);
  endfunction

  task automatic load(int idx, logic [63:0] ins);
    wr(32'h8000 + 32'(idx * 8), ins[31:0]);
    wr(32'h8004 + 32'(idx * 8), ins[63:32]);
  endtask

  task automatic run_and_check(input logic st, input logic [31:0] exp_last_arg);
    logic [31:0] d;
    events.delete();
    next_state = st;
    wr(32'h0000, 32'd0);                // START at pc 0
    @(negedge clk);
    check(busy, "busy after start");
    while (busy) @(negedge clk);
    check(events.size() == 4, $sformatf("4 trigger events, got %0d", events.size()));
    if (events.size() == 4) begin
      check(events[0].unit == 0 && events[0].arg == 32'h0004_0010, "first trigger pg0");
      check(events[1].unit == 1 && events[1].arg == 32'h0008_0020, "second trigger pg1");
      check(events[2].unit == 2 && events[2].arg == 32'h0008_0020, "rec trigger");
      check(events[1].t == events[2].t, "pg1 and rec in the same clock");
      check(events[1].t - events[0].t == 11, $sformatf("WAIT 10 spacing %0d", events[1].t - events[0].t));
      // report at rec+5, WAIT_STATE leaves in the report clock, BRANCH one
      // clock later, TRIG one clock later, visible one clock after that
      check(events[3].t - events[2].t == longint'(state_delay) + 3,
            $sformatf("state->trigger latency %0d", events[3].t - events[2].t));
      check(events[3].unit == 0 && events[3].arg == exp_last_arg,
            $sformatf("conditional trigger arg %h", events[3].arg));
    end
    rd(32'h0004, d);
    check(d[0] == 1'b0 && d[1] == 1'b0, "not yet relaxed right after the run");
    check(d[2] == st, "latched state in STATUS");
    repeat (30) @(negedge clk);
    rd(32'h0004, d);
    check(d[1] == 1'b0, "not relaxed after 30+ clocks");
    repeat (30) @(negedge clk);
    rd(32'h0004, d);
    check(d[1] == 1'b1, "relaxed after 60+ clocks");
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    axil_init();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    rd(32'h0004, d);
    check(d[1:0] == 2'b10, "idle and relaxed after reset");
    wr(32'h0008, 32'd50);                // relaxation delay 50 clocks

    load(0,  mk(OP_TRIG, 28'd1, 32'h0004_0010));
    load(1,  mk(OP_WAIT, 28'd0, 32'd10));
    load(2,  mk(OP_TRIG, 28'd6, 32'h0008_0020));
    load(3,  mk(OP_WAIT_STATE, 28'd0, 32'd0));
    load(4,  mk(OP_BRANCH_STATE, 28'd1, 32'd7));
    load(5,  mk(OP_TRIG, 28'd1, 32'h0000_AAAA));
    load(6,  mk(OP_END, 28'd0, 32'd0));
    load(7,  mk(OP_TRIG, 28'd1, 32'h0000_BBBB));
    load(8,  mk(OP_JUMP, 28'd0, 32'd10));
    load(9,  mk(OP_TRIG, 28'd7, 32'hFFFF_FFFF));   // skipped by the jump
    load(10, mk(OP_END, 28'd0, 32'd0));

    rd(32'h8000 + 7 * 8, d);
    check(d == 32'h0000_BBBB, "program readback");

    run_and_check(1'b0, 32'h0000_AAAA);
    run_and_check(1'b1, 32'h0000_BBBB);

    // early state report: arrives during a WAIT, before WAIT_STATE
    state_delay = 2;
    load(20, mk(OP_TRIG, 28'd4, 32'd1));
    load(21, mk(OP_WAIT, 28'd0, 32'd20));
    load(22, mk(OP_WAIT_STATE, 28'd0, 32'd0));
    load(23, mk(OP_BRANCH_STATE, 28'd1, 32'd26));
    load(24, mk(OP_TRIG, 28'd1, 32'h0000_0111));
    load(25, mk(OP_END, 28'd0, 32'd0));
    load(26, mk(OP_TRIG, 28'd1, 32'h0000_0222));
    load(27, mk(OP_END, 28'd0, 32'd0));
    events.delete();
    next_state = 1'b1;
    wr(32'h0000, 32'd20);
    @(negedge clk);
    while (busy) @(negedge clk);
    check(events.size() == 2, "early report run: 2 triggers");
    if (events.size() == 2) begin
      check(events[1].arg == 32'h0000_0222, "early report taken by WAIT_STATE");
      check(events[1].t - events[0].t == 23, $sformatf("no stall on early report %0d",
                                                      events[1].t - events[0].t));
    end
    rd(32'h0010, d);
    check(d == 32'd3, $sformatf("run counter %0d", d));
    rd(32'h000C, d);
    check(d == 32'd28, $sformatf("pc after END %0d", d));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
