// tb_pulse_generator: plays pulses from envelope memory and compares every
// DAC sample with a reference computed here in floating point:
//   ref = sat(round(32767*(I*cos(2*pi*a/1024) - Q*sin(2*pi*a/1024))/32768))
// with a = top 10 bits of the NCO phase. The NCO phase is modelled from the
// register writes seen on the bus (phase of lane 0 = 4*PHASE_INC*clocks since
// reset). Also checked: the 4-clock trigger-to-output
// latency, zero output outside pulses, saturation, the busy flag and the
// pulse counter. A deviation of 2 LSB is accepted for table rounding.
module tb_pulse_generator;
  import qc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  axil_req_t   axi_req;
  axil_rsp_t   axi_rsp;
  trig_t       trig;
  sample_vec_t dac;
  logic        busy;

  pulse_generator dut (.clk, .rst_n, .axi_req, .axi_rsp, .trig, .dac, .busy);

  `include "axil_tasks.svh"

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- NCO model from bus activity ----
  logic [31:0] m_inc = 0, m_off = 0, m_acc;
  logic [31:0] m_t = 0;                 // clocks since reset
  assign m_acc = 32'd4 * m_t * m_inc;  // NCO phase of lane 0 in this clock
  always @(posedge clk) begin
    if (rst_n) begin
      m_t <= m_t + 1;
      if (axi_req.awvalid && axi_req.wvalid && axi_rsp.awready) begin
        if (axi_req.awaddr[15:0] == 16'h0000) m_inc <= axi_req.wdata;
        if (axi_req.awaddr[15:0] == 16'h0004) m_off <= axi_req.wdata;
      end
    end
  end

  // ---- per-clock history, sampled at the falling edge ----
  localparam int H = 4000;
  int          ncyc = 0;
  logic [31:0] h_acc [H];
  sample_vec_t h_dac [H];
  logic        h_trig [H];
  always @(negedge clk) begin
    if (ncyc < H) begin
      h_acc[ncyc]  = m_acc;
      h_dac[ncyc]  = dac;
      h_trig[ncyc] = trig.valid;
    end
    ncyc++;
  end

  // envelope held by the testbench
  logic signed [15:0] env_i [4096], env_q [4096];

  function automatic int ref_sample(int k, logic [31:0] phase);
    real a, v;
    int  r;
    a = 2.0 * 3.14159265358979 * real'(phase[31:22]) / 1024.0;
    v = (real'(env_i[k]) * $cos(a) - real'(env_q[k]) * $sin(a)) * 32767.0 / 32768.0;
    r = $rtoi(v + (v >= 0 ? 0.5 : -0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  task automatic play_and_check(int start_row, int len);
    int t0, err_max;
    @(negedge clk);
    trig.valid = 1'b1;
    trig.arg   = {16'(len), 16'(start_row)};
    t0 = ncyc;
    @(negedge clk);
    trig = '0;
    check(busy, "busy while playing");
    repeat (len + 8) @(negedge clk);
    check(!busy, "idle after the pulse");
    err_max = 0;
    for (int c = t0; c < t0 + len + 7; c++) begin
      for (int j = 0; j < 4; j++) begin
        int exp_v, got;
        got = int'(h_dac[c][j]);
        if (c >= t0 + 4 && c < t0 + 4 + len) begin
          int r;
          logic [31:0] ph;
          r  = c - t0 - 4;
          ph = h_acc[c] + 32'(j) * m_inc + m_off;   // phase of the output clock
          exp_v = ref_sample((start_row + r) * 4 + j, ph);
        end else begin
          exp_v = 0;
        end
        if (got - exp_v > err_max) err_max = got - exp_v;
        if (exp_v - got > err_max) err_max = exp_v - got;
        check((got - exp_v <= 2) && (exp_v - got <= 2),
              $sformatf("clk %0d lane %0d got %0d exp %0d", c - t0, j, got, exp_v));
      end
    end
    $display("pulse row %0d len %0d: max deviation %0d LSB", start_row, len, err_max);
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
    axil_init();
    trig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // envelope: a ramp-shaped I/Q pulse on samples 16..63, full scale on
    // samples 64..71 (to drive the output into saturation)
    for (int k = 0; k < 4096; k++) begin
      env_i[k] = '0;
      env_q[k] = '0;
    end
    for (int k = 16; k < 64; k++) begin
      env_i[k] = 16'(k * 400 - 3000);
      env_q[k] = 16'(9000 - k * 211);
    end
    for (int k = 64; k < 72; k++) begin
      env_i[k] = 16'sh7fff;
      env_q[k] = 16'sh8001;
    end
    for (int k = 16; k < 72; k++) wr(32'h8000 + 32'(4 * k), {env_q[k], env_i[k]});

    wr(32'h0000, 32'h0A3D_70A4);   // 40 MHz at 1 GS/s
    wr(32'h0004, 32'h2000_0000);   // 45 degrees
    rd(32'h0000, d);
    check(d == 32'h0A3D_70A4, "PHASE_INC readback");

    play_and_check(4, 14);         // rows 4..17: the ramp and the full-scale part
    wr(32'h0000, 32'h1999_999A);   // 100 MHz
    wr(32'h0004, 32'hC000_0000);
    play_and_check(6, 5);
    // zero-length trigger starts nothing
    @(negedge clk);
    trig = '{valid: 1'b1, arg: 32'h0000_0004};
    @(negedge clk);
    trig = '0;
    @(negedge clk);
    check(!busy, "zero-length trigger ignored");
    rd(32'h000C, d);
    check(d == 32'd2, $sformatf("pulse counter %0d", d));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
