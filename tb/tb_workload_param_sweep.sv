// tb_workload_param_sweep: the "change parameters first, average later"
// measurement scheme, run on the full platform at its default sizes. A
// control loop of 42 parameter settings is repeated (the outer repetition
// loop is cut to 2 here), with the parameter changed before every shot and
// the per-setting averages formed only at the end. The parameter swept is
// the recording module's phase offset, so the measured I/Q point of the
// readout pulse (looped back from DAC 1 to the ADC) must turn around a
// circle: I = A*cos(theta), |Q| = A*|sin(theta)|. Each shot waits for the
// 100 us qubit relaxation delay (25000 clocks) through the sequencer's
// relaxed flag. Checked: the circle within 2% of A, equal results in both
// repetitions, the shot count in the sequencer, and that the relaxation
// stall happened.
module tb_workload_param_sweep;
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

  localparam logic [31:0] SEQ = 32'h0000_0000, PG1 = 32'h0002_0000, REC = 32'h0003_0000;
  localparam logic [31:0] INC = 32'h0400_0000;
  localparam int NPAR = 42, REPS = 2, RELAX = 25000;
  localparam real PI = 3.14159265358979;

  // loop-back: ADC sees DAC 1 one clock later
  always_ff @(posedge clk) adc <= dac1;

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint res_i [REPS][NPAR];
  longint res_q [REPS][NPAR];

  initial begin
    logic [31:0] d;
    int stalls;
    longint amp;
    axil_init();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int k = 0; k < 64; k++) wr(PG1 + 32'h8000 + 32'(4 * k), 32'h0000_4E20);
    wr(PG1 + 32'h0, INC);
    wr(REC + 32'h08, INC);
    wr(REC + 32'h10, 32'd12);
    wr(REC + 32'h14, 32'd25);
    wr(REC + 32'h18, 32'd20);
    wr(SEQ + 32'h08, 32'(RELAX));
    // program: readout pulse, recording window, end
    wr(SEQ + 32'h8000, {16'd16, 16'd0}); wr(SEQ + 32'h8004, {4'(OP_TRIG), 28'd2});
    wr(SEQ + 32'h8008, 32'd50);          wr(SEQ + 32'h800C, {4'(OP_TRIG), 28'd4});
    wr(SEQ + 32'h8010, 32'd0);           wr(SEQ + 32'h8014, {4'(OP_WAIT_STATE), 28'd0});
    wr(SEQ + 32'h8018, 32'd0);           wr(SEQ + 32'h801C, {4'(OP_END), 28'd0});

    stalls = 0;
    for (int rep = 0; rep < REPS; rep++) begin
      for (int k = 0; k < NPAR; k++) begin
        // parameter change before every shot
        wr(REC + 32'h0C, 32'(longint'(real'(k) / real'(NPAR) * 4294967296.0)) - 32'd4 * INC);
        rd(SEQ + 32'h04, d);
        while (!d[1]) begin
          stalls++;
          repeat (50) @(negedge clk);
          rd(SEQ + 32'h04, d);
        end
        wr(SEQ + 32'h00, 32'd0);
        rd(SEQ + 32'h04, d);
        while (d[0]) rd(SEQ + 32'h04, d);
        rd(REC + 32'h20, d);
        res_i[rep][k] = longint'(signed'(d));
        rd(REC + 32'h24, d);
        res_q[rep][k] = longint'(signed'(d));
      end
    end

    // averaging per setting, afterwards
    amp = (res_i[0][0] + res_i[1][0]) / 2;
    check(amp > 100000, $sformatf("amplitude %0d", amp));
    for (int k = 0; k < NPAR; k++) begin
      longint ai, aq, ei, eq, tol;
      real th;
      ai = (res_i[0][k] + res_i[1][k]) / 2;
      aq = (res_q[0][k] + res_q[1][k]) / 2;
      th = 2.0 * PI * real'(k) / real'(NPAR);
      ei = longint'($rtoi(real'(amp) * $cos(th)));
      eq = longint'($rtoi(real'(amp) * $sin(th)));
      if (eq < 0) eq = -eq;
      if (aq < 0) aq = -aq;
      tol = amp / 50;
      check(ai - ei <= tol && ei - ai <= tol && aq - eq <= tol && eq - aq <= tol,
            $sformatf("setting %0d: I=%0d |Q|=%0d expected %0d, %0d", k, ai, aq, ei, eq));
      check(res_i[0][k] == res_i[1][k] && res_q[0][k] == res_q[1][k],
            $sformatf("setting %0d repeatable", k));
    end
    rd(SEQ + 32'h10, d);
    check(d == 32'(NPAR * REPS), $sformatf("shots %0d", d));
    rd(REC + 32'h38, d);
    check(d == 32'(NPAR * REPS), $sformatf("results averaged in hardware %0d", d));
    check(stalls > 0, "relaxation stall happened");
    $display("relaxation stall polls: %0d", stalls);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
