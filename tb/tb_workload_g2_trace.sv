// tb_workload_g2_trace: acquisition step of a second-order correlation
// measurement, run on the full platform at its default sizes. One signal
// path is recorded for 102.4 us and reduced to 1024 I/Q pairs of 16 bits,
// one pair per 100 ns (DEC = 25 clocks), which the processor then copies
// out word by word over AXI4-Lite. The ADC carries a tone 1.5 MHz above the
// NCO frequency with a slow amplitude ramp and a small ripple, so the I/Q
// trace rotates over the window. The sequencer starts the window with one
// TRIG. Checked: the busy time of the recording module (window + 3 clocks),
// the trace length, and all 1024 trace points against sums computed here
// from the same samples with round(32767*sin) table values and the NCO
// phase PHASE_INC * samples since reset (within the error one table LSB
// per product can cause).
module tb_workload_g2_trace;
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

  localparam logic [31:0] SEQ = 32'h0000_0000, REC = 32'h0003_0000;
  localparam logic [31:0] INC = 32'h0A3D_70A4;          // 40 MHz
  localparam int  NPTS = 1024, DEC = 25, WIN = NPTS * DEC, TR_SHIFT = 20;
  localparam int  AMP = 6000;
  localparam real PI = 3.14159265358979;

  // NCO model: lane-0 phase = 4 * PHASE_INC * clocks since reset
  logic [31:0] m_inc = 0, m_t = 0;
  always @(posedge clk)
    if (rst_n) begin
      m_t <= m_t + 1;
      if (axi_req.awvalid && axi_req.wvalid && axi_rsp.awready &&
          axi_req.awaddr == REC + 32'h08)
        m_inc <= axi_req.wdata;
    end

  localparam int H = WIN + 4000;
  int          ncyc = 0;
  logic [31:0] h_ph [H];
  sample_vec_t h_x [H];
  logic        h_trig [H];
  logic        h_busy [H];

  always @(negedge clk) begin
    for (int j = 0; j < 4; j++) begin
      longint n;
      real v, a;
      n = 4 * longint'(ncyc) + j;
      a = real'(AMP) * (0.5 + 0.5 * real'(ncyc % 30000) / 30000.0);
      v = a * $cos(2.0 * PI * (0.04 + 0.0015) * real'(n)) + real'((n * 37) % 23 - 11);
      adc[j] = sample_t'($rtoi(v));
    end
    if (ncyc < H) begin
      h_ph[ncyc]   = 32'd4 * m_t * m_inc;
      h_x[ncyc]    = adc;
      h_trig[ncyc] = dut.trig_rec.valid;
      h_busy[ncyc] = unit_busy[2];
    end
    ncyc++;
  end

  function automatic longint tab(int a, bit is_sin);
    real x, v;
    x = 2.0 * PI * real'(a) / 1024.0;
    v = is_sin ? $sin(x) : $cos(x);
    return longint'($rtoi(v * 32767.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  task automatic ddc_sum(int c0, int n, output longint si, output longint sq);
    si = 0;
    sq = 0;
    for (int c = c0; c < c0 + n; c++)
      for (int j = 0; j < 4; j++) begin
        logic [31:0] ph;
        ph = h_ph[c] + 32'(j) * m_inc;
        si += longint'(h_x[c][j]) * tab(int'(ph[31:22]), 1'b0);
        sq -= longint'(h_x[c][j]) * tab(int'(ph[31:22]), 1'b1);
      end
  endtask

  initial begin : watchdog
    repeat (H + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int t0, busy_clks, bad;
    axil_init();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    wr(REC + 32'h08, INC);
    wr(REC + 32'h14, 32'(DEC));
    wr(REC + 32'h18, 32'(TR_SHIFT));
    wr(REC + 32'h10, 32'd16);
    // program: one recording window of WIN clocks
    wr(SEQ + 32'h8000, 32'(WIN)); wr(SEQ + 32'h8004, {4'(OP_TRIG), 28'd4});
    wr(SEQ + 32'h8008, 32'd0);    wr(SEQ + 32'h800C, {4'(OP_WAIT_STATE), 28'd0});
    wr(SEQ + 32'h8010, 32'd0);    wr(SEQ + 32'h8014, {4'(OP_END), 28'd0});
    wr(SEQ + 32'h0000, 32'd0);
    rd(SEQ + 32'h04, d);
    while (d[0]) begin
      repeat (100) @(negedge clk);
      rd(SEQ + 32'h04, d);
    end

    t0 = -1;
    busy_clks = 0;
    for (int c = 0; c < ncyc && c < H; c++) begin
      if (h_trig[c] && t0 < 0) t0 = c;
      if (h_busy[c]) busy_clks++;
    end
    check(t0 >= 0, "recording trigger seen");
    check(busy_clks == WIN + 3, $sformatf("recording busy %0d clocks", busy_clks));
    rd(REC + 32'h3C, d);
    check(d == 32'(NPTS), $sformatf("trace length %0d", d));

    // copy the trace out, as the processor does, and check every pair
    bad = 0;
    for (int m = 0; m < NPTS; m++) begin
      longint ti, tq, tol, gi, gq;
      ddc_sum(t0 + 1 + m * DEC, DEC, ti, tq);
      tol = longint'(4 * DEC * (AMP + 12)) / (1 << TR_SHIFT) + 2;
      rd(REC + 32'h8000 + 32'(4 * m), d);
      gi = longint'($signed(d[15:0]));
      gq = longint'($signed(d[31:16]));
      ti = ti >>> TR_SHIFT;
      tq = tq >>> TR_SHIFT;
      if (gi - ti > tol || ti - gi > tol || gq - tq > tol || tq - gq > tol) begin
        bad++;
        if (bad < 5) $display("trace %0d: %0d,%0d expected %0d,%0d", m, gi, gq, ti, tq);
      end
      if (m % 256 == 0) $display("trace %0d: I=%0d Q=%0d", m, gi, gq);
    end
    checks += NPTS;
    failures += bad;
    if (bad != 0) $display("FAIL: %0d trace points off", bad);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
