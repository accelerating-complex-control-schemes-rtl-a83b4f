// tb_recording_module: feeds the recording module a 40 MHz tone, phase
// locked to its NCO, (plus a
// small deterministic ripple) on the ADC and checks a readout window end to
// end against a reference computed here: the down-converted sums, the
// shifted I/Q result, the state decision against THRESH, the one-clock
// state report L+4 clocks after the trigger, the decimated trace points,
// the trace length, the averaging registers and their clear. The reference
// uses round(32767*sin) table values in floating point and the NCO phase
// modelled as PHASE_INC * samples since reset; results are accepted
// within the error one table LSB per product can cause.
module tb_recording_module;
  import qc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  axil_req_t   axi_req;
  axil_rsp_t   axi_rsp;
  sample_vec_t adc;
  trig_t       trig;
  state_rpt_t  state_out;
  logic        busy;

  recording_module dut (.clk, .rst_n, .axi_req, .axi_rsp, .adc, .trig, .state_out, .busy);

  `include "axil_tasks.svh"

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  localparam real PI = 3.14159265358979;
  localparam int  AMP = 8000;

  // ---- NCO model from bus writes ----
  logic [31:0] m_inc = 0, m_off = 0, m_acc;
  logic [31:0] m_t = 0;                 // clocks since reset
  assign m_acc = 32'd4 * m_t * m_inc;  // NCO phase of lane 0 in this clock
  always @(posedge clk) begin
    if (rst_n) begin
      m_t <= m_t + 1;
      if (axi_req.awvalid && axi_req.wvalid && axi_rsp.awready) begin
        if (axi_req.awaddr[15:0] == 16'h0008) m_inc <= axi_req.wdata;
        if (axi_req.awaddr[15:0] == 16'h000C) m_off <= axi_req.wdata;
      end
    end
  end

  // ---- ADC stimulus and history ----
  localparam int H = 6000;
  int          ncyc = 0;
  real         sig_phase = 0.0;     // phase of the test tone, radians
  logic [31:0] h_acc [H];
  sample_vec_t h_x [H];
  logic        h_rpt [H];
  logic        h_state [H];

  always @(negedge clk) begin
    for (int j = 0; j < 4; j++) begin
      longint n;
      real v;
      n = 4 * longint'(ncyc) + j;
      // tone locked to the NCO: phase of the NCO for this sample plus sig_phase
      v = real'(AMP) * $cos(2.0 * PI * real'(m_acc + 32'(j) * m_inc + m_off) / 4294967296.0
                            + sig_phase)
          + real'((n * 37) % 23 - 11);
      adc[j] = sample_t'($rtoi(v));
    end
    if (ncyc < H) begin
      h_acc[ncyc]   = m_acc;
      h_x[ncyc]     = adc;
      h_rpt[ncyc]   = state_out.valid;
      h_state[ncyc] = state_out.state;
    end
    ncyc++;
  end

  function automatic longint tab(int a, bit is_sin);
    real x;
    x = 2.0 * PI * real'(a) / 1024.0;
    return longint'($rtoi((is_sin ? $sin(x) : $cos(x)) * 32767.0 + ((is_sin ? $sin(x) : $cos(x)) >= 0 ? 0.5 : -0.5)));
  endfunction

  // sums over clocks [c0, c0+n) of the down-converted I and Q
  task automatic ddc_sum(int c0, int n, output longint si, output longint sq);
    si = 0;
    sq = 0;
    for (int c = c0; c < c0 + n; c++)
      for (int j = 0; j < 4; j++) begin
        logic [31:0] ph;
        int a;
        ph = h_acc[c] + 32'(j) * m_inc + m_off;
        a  = int'(ph[31:22]);
        si += longint'(h_x[c][j]) * tab(a, 1'b0);
        sq -= longint'(h_x[c][j]) * tab(a, 1'b1);
      end
  endtask

  function automatic longint asr(longint v, int s);
    return v >>> s;
  endfunction

  function automatic bit near(longint got, longint exp_v, longint tol);
    return (got - exp_v <= tol) && (exp_v - got <= tol);
  endfunction

  localparam int RES_SHIFT = 8, TR_SHIFT = 18, DEC = 5;

  task automatic measure(int len, logic exp_state, output longint ri, output longint rq);
    int t0;
    longint si, sq, tol;
    logic [31:0] d;
    @(negedge clk);
    trig = '{valid: 1'b1, arg: 32'(len)};
    t0 = ncyc;
    @(negedge clk);
    trig = '0;
    check(busy, "busy during the window");
    repeat (len + 8) @(negedge clk);
    check(!busy, "idle after the window");
    // state report exactly in clock t0+len+4
    for (int c = t0; c < t0 + len + 8; c++)
      check(h_rpt[c] == (c == t0 + len + 4), $sformatf("report at clock %0d", c - t0));
    check(h_state[t0 + len + 4] == exp_state, "reported state");
    ddc_sum(t0 + 1, len, si, sq);
    tol = longint'(4 * len * (AMP + 12)) / (1 << RES_SHIFT) + 2;
    rd(32'h0020, d);
    ri = longint'(signed'(d));
    check(near(ri, asr(si, RES_SHIFT), tol), $sformatf("RES_I %0d exp %0d", ri, asr(si, RES_SHIFT)));
    rd(32'h0024, d);
    rq = longint'(signed'(d));
    check(near(rq, asr(sq, RES_SHIFT), tol), $sformatf("RES_Q %0d exp %0d", rq, asr(sq, RES_SHIFT)));
    rd(32'h0004, d);
    check(d[1] == exp_state && d[0] == 1'b0, "STATUS state/busy");
    // trace
    rd(32'h003C, d);
    check(d == 32'(len / DEC), $sformatf("trace length %0d", d));
    for (int m = 0; m < len / DEC; m++) begin
      longint ti, tq, ttol;
      ddc_sum(t0 + 1 + m * DEC, DEC, ti, tq);
      ttol = longint'(4 * DEC * (AMP + 12)) / (1 << TR_SHIFT) + 2;
      rd(32'h8000 + 32'(4 * m), d);
      check(near(longint'(signed'(d[15:0])), asr(ti, TR_SHIFT), ttol) &&
            near(longint'(signed'(d[31:16])), asr(tq, TR_SHIFT), ttol),
            $sformatf("trace %0d: %0d,%0d exp %0d,%0d", m, $signed(d[15:0]),
                      $signed(d[31:16]), asr(ti, TR_SHIFT), asr(tq, TR_SHIFT)));
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    longint i1, q1, i2, q2;
    axil_init();
    trig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    wr(32'h0008, 32'h0A3D_70A4);        // 40 MHz, same as the tone
    wr(32'h0010, 32'(RES_SHIFT));
    wr(32'h0014, 32'(DEC));
    wr(32'h0018, 32'(TR_SHIFT));
    wr(32'h001C, 32'd0);                // threshold on I

    // the tone's phase relative to the NCO decides the sign of I
    sig_phase = 0.3;
    measure(52, 1'b1, i1, q1);
    check(i1 > 0, "in-phase tone gives positive I");
    sig_phase = 0.3 + PI;
    measure(52, 1'b0, i2, q2);
    check(i2 < 0, "inverted tone gives negative I");

    rd(32'h0038, d);
    check(d == 32'd2, "two results averaged");
    rd(32'h0028, d);
    check(d == 32'(i1 + i2), "AVG_I low word");
    rd(32'h002C, d);
    check(d == 32'((i1 + i2) >>> 32), "AVG_I high word");
    rd(32'h0030, d);
    check(d == 32'(q1 + q2), "AVG_Q low word");
    wr(32'h0000, 32'd1);
    rd(32'h0038, d);
    check(d == 32'd0, "averages cleared");

    // a trigger while busy is ignored: the window keeps its first length
    @(negedge clk);
    trig = '{valid: 1'b1, arg: 32'd20};
    @(negedge clk);
    trig = '{valid: 1'b1, arg: 32'd3};
    @(negedge clk);
    trig = '0;
    repeat (18) @(negedge clk);
    check(busy, "retrigger ignored while busy");
    repeat (8) @(negedge clk);
    check(!busy, "first window completed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
