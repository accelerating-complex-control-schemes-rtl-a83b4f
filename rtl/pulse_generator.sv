// pulse_generator: produces the DAC sample stream of one output channel.
// A trigger from the sequencer plays a pulse whose shape is a complex (I/Q)
// envelope stored in envelope memory, up-converted by a numerically
// controlled oscillator (NCO) whose frequency and phase are registers:
//
//   dac[n] = sat16( round( (I[n]*cos(phi[n]) - Q[n]*sin(phi[n])) / 2^15 ) )
//   phi[n] = 2*pi * (PHASE_INC*n + PHASE_OFF) / 2^32
//
// n counts samples since reset, at the dac port (the pipeline delay is
// compensated). The phase is computed as PHASE_INC*n from a free-running
// sample counter rather than accumulated, so it depends only on time and
// the current register values: a pulse keeps a fixed phase relation to
// every other pulse and to the recording module's down-conversion NCO,
// whatever its start time and whenever the frequency was last written. The phase is cut
// to the top 10 bits for the sine table (sincos_lut). SPC = 4 samples leave
// per clock (1 GS/s at 250 MHz); lane 0 is the earliest sample.
//
// Trigger argument: {length in clocks [31:16], start row [15:0]}. A row holds
// SPC consecutive envelope samples, so a pulse starts on a 4 ns boundary and
// lasts a whole number of clocks. A new trigger replaces a running pulse.
// Outside a pulse the output is 0. Latency: a trigger seen in clock t gives
// the first samples at the dac output in clock t+4.
//
// Registers (byte offsets, AXI4-Lite via axil_regif):
//   0x0000 PHASE_INC  RW  NCO phase step per sample (f = PHASE_INC/2^32 * 1 GS/s)
//   0x0004 PHASE_OFF  RW  NCO phase offset
//   0x0008 STATUS     R   bit0 busy (pulse playing)
//   0x000C PULSES     R   number of pulses started
//   0x8000 + 4*k      W   envelope sample k: {Q[31:16], I[15:0]}
//
// The paper states that two such generators feed the DACs, one for qubit
// manipulation and one for readout pulses, and that frequency, phase and
// shape of the pulses can be set during the experiment. The envelope-memory
// form, its size (ENV_DEPTH), the NCO and the register map are this design's
// choices.
module pulse_generator
  import qc_pkg::*;
#(
  parameter int unsigned ENV_DEPTH = 4096   // envelope samples
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   axi_req,
  output axil_rsp_t   axi_rsp,
  input  trig_t       trig,
  output sample_vec_t dac,
  output logic        busy
);

  localparam int unsigned ROWS  = ENV_DEPTH / SPC;
  localparam int unsigned ROW_W = $clog2(ROWS);
  localparam int unsigned K_W   = $clog2(ENV_DEPTH);
  localparam int unsigned SPC_W = $clog2(SPC);

  // ---------------- register port ----------------
  logic                   reg_we, reg_re;
  logic [SLV_SEL_LSB-1:0] reg_waddr, reg_raddr;
  logic [AXI_DW-1:0]      reg_wdata, reg_rdata;

  axil_regif u_regif (
    .clk, .rst_n, .req(axi_req), .rsp(axi_rsp),
    .reg_we, .reg_waddr, .reg_wdata, .reg_re, .reg_raddr, .reg_rdata
  );

  logic [PHASE_W-1:0] phase_inc_q, phase_off_q;
  logic [31:0]        pulses_q;

  // ---------------- envelope memory: SPC banks of ROWS words --------------
  // Sample k lives in bank k % SPC, row k / SPC, so one row read gives the
  // SPC samples of one clock.
  logic [K_W-1:0] env_k;
  assign env_k = reg_waddr[2 +: K_W];

  logic             active_q;
  logic [ROW_W-1:0] row_q;
  logic [15:0]      remain_q;
  logic [31:0]      env_rd_q [SPC];

  for (genvar b = 0; b < int'(SPC); b++) begin : g_bank
    logic [31:0] mem [ROWS];
    logic        we;
    assign we = reg_we && reg_waddr[15] && (int'(env_k[SPC_W-1:0]) == b);
    always_ff @(posedge clk) begin
      if (we) mem[env_k[K_W-1:SPC_W]] <= reg_wdata;
      env_rd_q[b] <= mem[row_q];
    end
  end

  // ---------------- control and NCO ----------------
  logic [PHASE_W-1:0] t_q;                  // clocks since reset
  logic [PHASE_W-1:0] ph_q [SPC];
  logic               v1_q, v2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_inc_q <= '0;
      phase_off_q <= '0;
      pulses_q    <= '0;
      active_q    <= 1'b0;
      row_q       <= '0;
      remain_q    <= '0;
      t_q         <= '0;
      v1_q        <= 1'b0;
      for (int j = 0; j < int'(SPC); j++) ph_q[j] <= '0;
    end else begin
      if (reg_we && !reg_waddr[15]) begin
        unique case (reg_waddr[7:0])
          8'h00: phase_inc_q <= reg_wdata;
          8'h04: phase_off_q <= reg_wdata;
          default: ;
        endcase
      end
      t_q <= t_q + 1'b1;

      if (trig.valid && trig.arg[31:16] != 16'd0) begin
        active_q <= 1'b1;
        row_q    <= trig.arg[ROW_W-1:0];
        remain_q <= trig.arg[31:16];
        pulses_q <= pulses_q + 1;
      end else if (active_q) begin
        row_q    <= row_q + 1'b1;
        remain_q <= remain_q - 1'b1;
        if (remain_q == 16'd1) active_q <= 1'b0;
      end

      // stage 1: envelope row read (env_rd_q) and per-lane phase. The
      // samples computed now leave the dac port 3 clocks later, so the phase
      // is taken 3*SPC samples ahead: each output sample carries the NCO
      // phase of the moment it appears at the port.
      v1_q <= active_q;
      for (int j = 0; j < int'(SPC); j++)
        ph_q[j] <= phase_inc_q * (PHASE_W'(SPC) * (t_q + PHASE_W'(3)) + PHASE_W'(j))
                   + phase_off_q;
    end
  end

  assign busy = active_q;

  // stage 2: sine/cosine lookup
  sample_t lut_sin [SPC];
  sample_t lut_cos [SPC];
  for (genvar j = 0; j < int'(SPC); j++) begin : g_lut
    sincos_lut u_lut (
      .addr (ph_q[j][PHASE_W-1 -: LUT_AW]),
      .sin_o(lut_sin[j]),
      .cos_o(lut_cos[j])
    );
  end

  sample_t sin_q [SPC], cos_q [SPC], ei_q [SPC], eq_q [SPC];

  // complex multiply I*cos - Q*sin, round to nearest, saturate to 16 bits
  sample_t mix_sat [SPC];
  always_comb begin
    for (int j = 0; j < int'(SPC); j++) begin
      logic signed [33:0] p;
      logic signed [18:0] r;
      p = 34'(ei_q[j]) * 34'(cos_q[j]) - 34'(eq_q[j]) * 34'(sin_q[j]) + 34'sd16384;
      r = 19'(p >>> 15);
      if (r > 19'sd32767)       mix_sat[j] = 16'sh7fff;
      else if (r < -19'sd32768) mix_sat[j] = 16'sh8000;
      else                      mix_sat[j] = sample_t'(r);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2_q <= 1'b0;
      dac  <= '0;
      for (int j = 0; j < int'(SPC); j++) begin
        sin_q[j] <= '0; cos_q[j] <= '0; ei_q[j] <= '0; eq_q[j] <= '0;
      end
    end else begin
      v2_q <= v1_q;
      for (int j = 0; j < int'(SPC); j++) begin
        sin_q[j] <= lut_sin[j];
        cos_q[j] <= lut_cos[j];
        ei_q[j]  <= v1_q ? sample_t'(env_rd_q[j][15:0])  : '0;
        eq_q[j]  <= v1_q ? sample_t'(env_rd_q[j][31:16]) : '0;
      end
      // stage 3: register the rounded, saturated product
      for (int j = 0; j < int'(SPC); j++)
        dac[j] <= v2_q ? mix_sat[j] : '0;
    end
  end

  // ---------------- register read ----------------
  always_comb begin
    unique case (reg_raddr[7:0])
      8'h00:   reg_rdata = phase_inc_q;
      8'h04:   reg_rdata = phase_off_q;
      8'h08:   reg_rdata = {31'd0, active_q};
      8'h0C:   reg_rdata = pulses_q;
      default: reg_rdata = '0;
    endcase
    if (reg_raddr[15]) reg_rdata = '0;
  end

endmodule
