// recording_module: evaluates the qubit's readout response from the ADC.
// When the sequencer triggers it, it down-converts the incoming samples
// with its NCO, integrates them over a window to one complex (I/Q) value,
// decides the qubit state from that value, reports the state to the
// sequencer, adds the value to running averages and stores a decimated
// I/Q time trace for software to read.
//
//   I[n] =  x[n]*cos(phi[n]),  Q[n] = -x[n]*sin(phi[n])   (mix by e^{-j phi})
//   phi[n] = 2*pi*(PHASE_INC*n + PHASE_OFF)/2^32, n = samples since reset
//            at the adc port (computed from a free-running sample counter)
//   RES_I/Q = (sum over the window of I/Q) >>> RES_SHIFT, kept to 32 bits
//   state   = RES_I > THRESH (signed)
//   trace[m] = sat16((sum of I/Q over clocks m*DEC .. m*DEC+DEC-1) >>> TRACE_SHIFT)
//
// The NCO has the same form as the pulse generators' NCO and also counts
// from reset, so a readout pulse and its down-conversion stay phase locked.
// SPC = 4 samples arrive per clock. Trigger argument: window length in
// clocks in [15:0] (0 is ignored); a trigger while busy is ignored. Timing:
// with a trigger seen in clock t and a window of L clocks, samples from
// clock t+1 to t+L are used, and the state report (one-clock valid pulse)
// and the result registers follow in clock t+L+4. A trace point is written
// every DEC clocks of the window; a partial last block is dropped; at most
// TRACE_DEPTH points are kept.
//
// Registers (byte offsets, AXI4-Lite via axil_regif):
//   0x0000 CTRL        W  bit0: clear the averages
//   0x0004 STATUS      R  bit0 busy, bit1 last state
//   0x0008 PHASE_INC   RW    0x000C PHASE_OFF  RW
//   0x0010 RES_SHIFT   RW    0x0014 DEC        RW  (clocks per trace point)
//   0x0018 TRACE_SHIFT RW    0x001C THRESH     RW
//   0x0020 RES_I R   0x0024 RES_Q R
//   0x0028/0x002C AVG_I low/high  0x0030/0x0034 AVG_Q low/high (sums of RES)
//   0x0038 AVG_N R  (results summed)   0x003C TRACE_LEN R
//   0x8000 + 4*m       R  trace point m: {Q[31:16], I[15:0]}
//
// The paper gives the function: digital down-conversion of the ADC signal,
// further filtering and processing, averaging over measurements, extraction
// of the qubit state that is reported back to the sequencer, an I/Q pair
// read by software per measurement, and signal data reduced to one I/Q pair
// (two 16-bit values) per 100 ns that software copies out, 1024 pairs in
// its correlation example. The boxcar integration, the threshold on I as
// the state decision and the register map are this design's choices.
module recording_module
  import qc_pkg::*;
#(
  parameter int unsigned TRACE_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   axi_req,
  output axil_rsp_t   axi_rsp,
  input  sample_vec_t adc,
  input  trig_t       trig,
  output state_rpt_t  state_out,
  output logic        busy
);

  localparam int unsigned TR_W = $clog2(TRACE_DEPTH);

  // ---------------- register port ----------------
  logic                   reg_we, reg_re;
  logic [SLV_SEL_LSB-1:0] reg_waddr, reg_raddr;
  logic [AXI_DW-1:0]      reg_wdata, reg_rdata;

  axil_regif u_regif (
    .clk, .rst_n, .req(axi_req), .rsp(axi_rsp),
    .reg_we, .reg_waddr, .reg_wdata, .reg_re, .reg_raddr, .reg_rdata
  );

  logic [PHASE_W-1:0] phase_inc_q, phase_off_q;
  logic [5:0]         res_shift_q, trace_shift_q;
  logic [15:0]        dec_q;
  logic signed [31:0] thresh_q;

  // ---------------- window control and NCO ----------------
  logic               active_q;
  logic [15:0]        remain_q;
  logic [PHASE_W-1:0] t_q;      // clocks since reset
  logic [PHASE_W-1:0] ph_q [SPC];
  sample_t            x1_q [SPC];
  logic               v1_q, l1_q, v2_q, l2_q, v3_q, l3_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      remain_q <= '0;
      t_q      <= '0;
      v1_q     <= 1'b0;
      l1_q     <= 1'b0;
      for (int j = 0; j < int'(SPC); j++) begin
        ph_q[j] <= '0;
        x1_q[j] <= '0;
      end
    end else begin
      t_q <= t_q + 1'b1;
      if (trig.valid && !busy && trig.arg[15:0] != 16'd0) begin
        active_q <= 1'b1;
        remain_q <= trig.arg[15:0];
      end else if (active_q) begin
        remain_q <= remain_q - 1'b1;
        if (remain_q == 16'd1) active_q <= 1'b0;
      end
      // stage 1: capture samples and per-lane phase
      v1_q <= active_q;
      l1_q <= active_q && remain_q == 16'd1;
      for (int j = 0; j < int'(SPC); j++) begin
        ph_q[j] <= phase_inc_q * (PHASE_W'(SPC) * t_q + PHASE_W'(j)) + phase_off_q;
        x1_q[j] <= adc[j];
      end
    end
  end

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

  sample_t x2_q [SPC], sin_q [SPC], cos_q [SPC];
  logic signed [33:0] si_q, sq_q;     // stage 3: lane sums of one clock

  // mix by e^{-j phi} and add the SPC lanes of one clock
  logic signed [33:0] lane_si, lane_sq;
  always_comb begin
    lane_si = '0;
    lane_sq = '0;
    for (int j = 0; j < int'(SPC); j++) begin
      lane_si = lane_si + 34'(x2_q[j]) * 34'(cos_q[j]);
      lane_sq = lane_sq - 34'(x2_q[j]) * 34'(sin_q[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2_q <= 1'b0; l2_q <= 1'b0; v3_q <= 1'b0; l3_q <= 1'b0;
      si_q <= '0;   sq_q <= '0;
      for (int j = 0; j < int'(SPC); j++) begin
        x2_q[j] <= '0; sin_q[j] <= '0; cos_q[j] <= '0;
      end
    end else begin
      v2_q <= v1_q; l2_q <= l1_q;
      for (int j = 0; j < int'(SPC); j++) begin
        x2_q[j]  <= x1_q[j];
        sin_q[j] <= lut_sin[j];
        cos_q[j] <= lut_cos[j];
      end
      v3_q <= v2_q; l3_q <= l2_q;
      si_q <= lane_si;
      sq_q <= lane_sq;
    end
  end

  // ---------------- stage 4: integration, trace, result ----------------
  logic signed [63:0] int_i_q, int_q_q, tr_i_q, tr_q_q;
  logic [15:0]        dec_cnt_q;
  logic [TR_W:0]      tr_n_q;
  logic [31:0]        trace_mem [TRACE_DEPTH];
  logic signed [31:0] res_i_q, res_q_q;
  logic               state_q;
  logic signed [63:0] avg_i_q, avg_q_q;
  logic [31:0]        avg_n_q;
  logic               rpt_q;

  function automatic sample_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return sample_t'(v);
  endfunction

  logic signed [63:0] int_i_n, int_q_n, tr_i_n, tr_q_n, res_i_n, res_q_n;
  assign int_i_n = int_i_q + 64'(si_q);
  assign int_q_n = int_q_q + 64'(sq_q);
  assign tr_i_n  = tr_i_q + 64'(si_q);
  assign tr_q_n  = tr_q_q + 64'(sq_q);
  assign res_i_n = int_i_n >>> res_shift_q;
  assign res_q_n = int_q_n >>> res_shift_q;

  logic tr_we;
  assign tr_we = v3_q && (dec_cnt_q + 16'd1 >= dec_q) && (int'(tr_n_q) < int'(TRACE_DEPTH));

  always_ff @(posedge clk) begin
    if (tr_we)
      trace_mem[tr_n_q[TR_W-1:0]] <= {sat16(tr_q_n >>> trace_shift_q), sat16(tr_i_n >>> trace_shift_q)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_inc_q   <= '0;
      phase_off_q   <= '0;
      res_shift_q   <= '0;
      trace_shift_q <= '0;
      dec_q         <= 16'd1;
      thresh_q      <= '0;
      int_i_q <= '0; int_q_q <= '0; tr_i_q <= '0; tr_q_q <= '0;
      dec_cnt_q <= '0; tr_n_q <= '0;
      res_i_q <= '0; res_q_q <= '0; state_q <= 1'b0;
      avg_i_q <= '0; avg_q_q <= '0; avg_n_q <= '0;
      rpt_q   <= 1'b0;
      busy    <= 1'b0;
    end else begin
      rpt_q <= 1'b0;
      if (reg_we && !reg_waddr[15]) begin
        unique case (reg_waddr[7:0])
          8'h00: if (reg_wdata[0]) begin
            avg_i_q <= '0; avg_q_q <= '0; avg_n_q <= '0;
          end
          8'h08: phase_inc_q   <= reg_wdata;
          8'h0C: phase_off_q   <= reg_wdata;
          8'h10: res_shift_q   <= reg_wdata[5:0];
          8'h14: dec_q         <= reg_wdata[15:0];
          8'h18: trace_shift_q <= reg_wdata[5:0];
          8'h1C: thresh_q      <= reg_wdata;
          default: ;
        endcase
      end

      if (trig.valid && !busy && trig.arg[15:0] != 16'd0) begin
        busy      <= 1'b1;
        int_i_q   <= '0; int_q_q <= '0; tr_i_q <= '0; tr_q_q <= '0;
        dec_cnt_q <= '0; tr_n_q  <= '0;
      end else if (v3_q) begin
        int_i_q <= int_i_n;
        int_q_q <= int_q_n;
        if (dec_cnt_q + 16'd1 >= dec_q) begin
          dec_cnt_q <= '0;
          tr_i_q    <= '0;
          tr_q_q    <= '0;
          if (int'(tr_n_q) < int'(TRACE_DEPTH)) tr_n_q <= tr_n_q + 1'b1;
        end else begin
          dec_cnt_q <= dec_cnt_q + 1'b1;
          tr_i_q    <= tr_i_n;
          tr_q_q    <= tr_q_n;
        end
        if (l3_q) begin
          res_i_q <= 32'(res_i_n);
          res_q_q <= 32'(res_q_n);
          state_q <= 32'(res_i_n) > thresh_q;
          avg_i_q <= avg_i_q + 64'(signed'(32'(res_i_n)));
          avg_q_q <= avg_q_q + 64'(signed'(32'(res_q_n)));
          avg_n_q <= avg_n_q + 1;
          rpt_q   <= 1'b1;
          busy    <= 1'b0;
        end
      end
    end
  end

  assign state_out.valid = rpt_q;
  assign state_out.state = state_q;

  // ---------------- register read ----------------
  always_comb begin
    reg_rdata = '0;
    if (reg_raddr[15]) begin
      reg_rdata = trace_mem[reg_raddr[2 +: TR_W]];
    end else begin
      unique case (reg_raddr[7:0])
        8'h04: reg_rdata = {30'd0, state_q, busy};
        8'h08: reg_rdata = phase_inc_q;
        8'h0C: reg_rdata = phase_off_q;
        8'h10: reg_rdata = 32'(res_shift_q);
        8'h14: reg_rdata = 32'(dec_q);
        8'h18: reg_rdata = 32'(trace_shift_q);
        8'h1C: reg_rdata = thresh_q;
        8'h20: reg_rdata = res_i_q;
        8'h24: reg_rdata = res_q_q;
        8'h28: reg_rdata = avg_i_q[31:0];
        8'h2C: reg_rdata = avg_i_q[63:32];
        8'h30: reg_rdata = avg_q_q[31:0];
        8'h34: reg_rdata = avg_q_q[63:32];
        8'h38: reg_rdata = avg_n_q;
        8'h3C: reg_rdata = 32'(tr_n_q);
        default: reg_rdata = '0;
      endcase
    end
  end

endmodule
