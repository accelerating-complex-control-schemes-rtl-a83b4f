// tb_qc_platform_top: end-to-end run of the platform at its default sizes,
// driven only through the AXI4-Lite port, the way a processor-side control
// task drives it. A behavioural qubit/RF model closes the loop: each pulse
// of the manipulation generator (a pi pulse) flips the model qubit, and the
// ADC receives the readout generator's output two clocks later, inverted
// when the qubit is excited. The control loop repeats, like a single-shot
// readout task: wait until the qubit is relaxed, start the sequencer at a
// chosen program counter, wait while sequencer and recording are busy, read
// the I/Q pair. The program plays a pi pulse (only when started at pc 0),
// reads the qubit out, and, if it measured 1, plays a second pi pulse to
// reset it (conditional sequence). Checked: the state measured against the
// model qubit, the sign of I, the conditional reset, the pulse spacing on
// the DAC ports (36 ns), the averages, the trace length, and that each
// mechanism happened: relaxation stall, branch taken and not taken,
// averaging, trace capture, and a DECERR on an unmapped address.
module tb_qc_platform_top;
  import qc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  axil_req_t   axi_req;
  axil_rsp_t   axi_rsp;
  sample_vec_t adc, dac0, dac1;
  logic        seq_busy;
  logic [2:0]  unit_busy;
  state_rpt_t  qubit_state;

  qc_platform_top dut (
    .clk, .rst_n,
    .s_axil_req(axi_req), .s_axil_rsp(axi_rsp),
    .adc, .dac0, .dac1,
    .seq_busy, .unit_busy, .qubit_state
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

  localparam logic [31:0] SEQ = 32'h0000_0000, PG0 = 32'h0001_0000,
                          PG1 = 32'h0002_0000, REC = 32'h0003_0000;
  localparam logic [31:0] INC = 32'h0400_0000;   // 15.625 MHz
  localparam int          LOOP_DELAY = 2;        // clocks, DAC1 -> ADC

  // ---- qubit / RF model ----
  logic        excited = 1'b0;
  logic        pg0_busy_d = 1'b0;
  sample_vec_t dly [LOOP_DELAY];
  int          pi_pulses = 0;
  longint      cyc = 0;
  longint      t_dac0 = -1, t_dac1 = -1;
  logic        dac0_on_d = 1'b0, dac1_on_d = 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    pg0_busy_d <= rst_n && unit_busy[0];
    if (rst_n && unit_busy[0] && !pg0_busy_d) begin
      excited   <= !excited;
      pi_pulses <= pi_pulses + 1;
    end
    dly[0] <= dac1;
    for (int i = 1; i < LOOP_DELAY; i++) dly[i] <= dly[i-1];
    dac0_on_d <= (dac0 != '0);
    dac1_on_d <= (dac1 != '0);
    if (dac0 != '0 && !dac0_on_d && t_dac0 < 0) t_dac0 <= cyc;
    if (dac1 != '0 && !dac1_on_d && t_dac1 < 0) t_dac1 <= cyc;
  end

  always_comb
    for (int j = 0; j < int'(SPC); j++)
      adc[j] = excited ? sample_t'(-dly[LOOP_DELAY-1][j]) : dly[LOOP_DELAY-1][j];

  function automatic logic [63:0] mk(opcode_e op, logic [27:0] a, logic [31:0] b);
    instr_t i;
    i.op = op; i.a = a; i.b = b;
    return 64'(i);
  endfunction

  task automatic load(int idx, logic [63:0] ins);
    wr(SEQ + 32'h8000 + 32'(idx * 8), ins[31:0]);
    wr(SEQ + 32'h8004 + 32'(idx * 8), ins[63:32]);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_relax_stall = 0, n_branch_taken = 0, n_branch_not = 0, n_decerr = 0;
  int n_reports = 0;
  always @(posedge clk) if (rst_n && qubit_state.valid) n_reports <= n_reports + 1;

  initial begin
    logic [31:0] d;
    logic [1:0]  r;
    longint      sum_i, sum_q, last_i;
    localparam int REPS = 6;
    axil_init();
    for (int i = 0; i < LOOP_DELAY; i++) dly[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // envelopes: pi pulse 4 clocks, readout pulse 16 clocks, constant I
    for (int k = 0; k < 16; k++) wr(PG0 + 32'h8000 + 32'(4 * k), 32'h0000_3000);
    for (int k = 0; k < 64; k++) wr(PG1 + 32'h8000 + 32'(4 * k), 32'h0000_4E20);
    wr(PG0 + 32'h0, 32'h0800_0000);
    wr(PG1 + 32'h0, INC);
    // recording NCO: same frequency, phase offset cancels the loop delay
    wr(REC + 32'h08, INC);
    // (plus half a turn, so that ground gives I < 0 and state 0)
    wr(REC + 32'h0C, 32'h8000_0000 - 32'(4 * LOOP_DELAY) * INC);
    wr(REC + 32'h10, 32'd12);
    wr(REC + 32'h14, 32'd25);           // one trace point per 100 ns
    wr(REC + 32'h18, 32'd20);
    wr(REC + 32'h1C, 32'd0);
    wr(SEQ + 32'h08, 32'd400);          // relaxation delay: 1.6 us

    // program
    load(0, mk(OP_TRIG, 28'd1, {16'd4, 16'd0}));     // pi pulse
    load(1, mk(OP_WAIT, 28'd0, 32'd8));
    load(2, mk(OP_TRIG, 28'd2, {16'd16, 16'd0}));    // readout pulse
    load(3, mk(OP_TRIG, 28'd4, 32'd50));             // recording window 200 ns
    load(4, mk(OP_WAIT_STATE, 28'd0, 32'd0));
    load(5, mk(OP_BRANCH_STATE, 28'd1, 32'd7));
    load(6, mk(OP_END, 28'd0, 32'd0));
    load(7, mk(OP_TRIG, 28'd1, {16'd4, 16'd0}));     // reset pulse
    load(8, mk(OP_END, 28'd0, 32'd0));

    // unmapped module window
    axil_read(32'h000F_0000, d, r);
    if (r == RESP_DECERR) n_decerr++;

    sum_i = 0;
    sum_q = 0;
    for (int rep = 0; rep < REPS; rep++) begin
      int  start_pc, pulses_before;
      logic exp_state;
      start_pc  = (rep % 2 == 0) ? 0 : 2;   // 2: skip the pi pulse
      exp_state = (rep % 2 == 0);
      // wait until the qubit is relaxed
      rd(SEQ + 32'h04, d);
      while (!d[1]) begin
        n_relax_stall++;
        rd(SEQ + 32'h04, d);
      end
      check(!excited, "model qubit in ground state before the run");
      pulses_before = pi_pulses;
      t_dac0 = -1;
      t_dac1 = -1;
      wr(SEQ + 32'h00, 32'(start_pc));
      // wait while busy
      rd(SEQ + 32'h04, d);
      while (d[0]) rd(SEQ + 32'h04, d);
      rd(REC + 32'h04, d);
      while (d[0]) rd(REC + 32'h04, d);
      check(d[1] == exp_state, $sformatf("rep %0d measured state %0d", rep, d[1]));
      rd(REC + 32'h20, d);
      sum_i += longint'(signed'(d));
      last_i = longint'(signed'(d));
      check(exp_state ? signed'(d) > 1000 : signed'(d) < -1000,
            $sformatf("rep %0d RES_I %0d", rep, signed'(d)));
      begin
        longint ri;
        ri = last_i;
        rd(REC + 32'h24, d);
        sum_q += longint'(signed'(d));
        // the loop delay is compensated exactly, so the point lies on the I axis
        check(longint'(signed'(d)) * 50 < (ri < 0 ? -ri : ri) &&
              -longint'(signed'(d)) * 50 < (ri < 0 ? -ri : ri),
              $sformatf("rep %0d RES_Q %0d near 0", rep, signed'(d)));
      end
      repeat (10) @(negedge clk);
      if (exp_state) begin
        n_branch_taken++;
        check(pi_pulses == pulses_before + 2, "pi pulse and conditional reset pulse");
        check(t_dac0 >= 0 && t_dac1 >= 0, "both DAC channels active");
      end else begin
        n_branch_not++;
        check(pi_pulses == pulses_before, "no pulse on the manipulation channel");
      end
      check(!excited, "qubit reset at the end of the run");
      rd(REC + 32'h3C, d);
      check(d == 32'd2, $sformatf("trace points %0d", d));
    end

    // pulse spacing in a run started at pc 0: pi pulse, WAIT 8, readout
    rd(SEQ + 32'h04, d);
    while (!d[1]) rd(SEQ + 32'h04, d);
    t_dac0 = -1;
    t_dac1 = -1;
    wr(SEQ + 32'h00, 32'd0);
    rd(SEQ + 32'h04, d);
    while (d[0]) rd(SEQ + 32'h04, d);
    check(t_dac1 - t_dac0 == 9, $sformatf("readout %0d clocks after pi pulse", t_dac1 - t_dac0));
    repeat (10) @(negedge clk);
    while (excited) @(negedge clk);

    rd(REC + 32'h38, d);
    check(d == 32'(REPS + 1), $sformatf("AVG_N %0d", d));
    rd(SEQ + 32'h10, d);
    check(d == 32'(REPS + 1), $sformatf("sequencer runs %0d", d));
    check(n_reports == REPS + 1, $sformatf("state reports %0d", n_reports));
    wr(REC + 32'h00, 32'd1);

    // every mechanism happened at least once
    check(n_relax_stall > 0, "relaxation stall seen");
    check(n_branch_taken > 0, "conditional branch taken");
    check(n_branch_not > 0, "conditional branch not taken");
    check(n_decerr > 0, "DECERR on unmapped address");
    $display("mechanisms: relax_stall=%0d branch_taken=%0d branch_not=%0d decerr=%0d reports=%0d",
             n_relax_stall, n_branch_taken, n_branch_not, n_decerr, n_reports);
    $display("sum I=%0d sum Q=%0d", sum_i, sum_q);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
