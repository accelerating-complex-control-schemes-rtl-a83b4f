// qc_platform_top: the FPGA logic that controls and reads out one
// superconducting qubit. A manipulation pulse generator and a readout pulse
// generator drive two DAC channels; a recording module down-converts and
// evaluates the ADC channel; a sequencer fires all three on a 4 ns grid over
// the trigger bus and receives the measured qubit state back, so that it can
// run sequences conditioned on a measurement. The processors reach every
// module's registers through one AXI4-Lite port and an address-decoding
// interconnect:
//
//   0x0_0000  sequencer         0x1_0000  pulse generator 0 (manipulation)
//   0x2_0000  pulse generator 1 (readout)   0x3_0000  recording module
//   (bits [19:16] select the module; other windows answer DECERR)
//
// Everything runs in one clock domain locked to the converters: 250 MHz with
// SPC = 4 samples per clock per channel, i.e. 1 GS/s after the converters'
// own decimation and interpolation filters. The converters, the RF front
// end, the processors and their memory are outside this module; their
// signals are the ports. The block structure, the trigger bus, the state
// feedback path and the single clock domain follow the paper's platform
// figure and text; addresses and widths are this design's choices.
module qc_platform_top
  import qc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave port from the processing system (RPU and APU)
  input  axil_req_t   s_axil_req,
  output axil_rsp_t   s_axil_rsp,
  // converter sample streams (SPC samples per clock, [0] earliest)
  input  sample_vec_t adc,
  output sample_vec_t dac0,
  output sample_vec_t dac1,
  // observation
  output logic        seq_busy,
  output logic [2:0]  unit_busy,     // {recording, pulse gen 1, pulse gen 0}
  output state_rpt_t  qubit_state
);

  axil_req_t m_req [N_SLAVES];
  axil_rsp_t m_rsp [N_SLAVES];

  axil_interconnect u_xbar (
    .clk, .rst_n,
    .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .m_req, .m_rsp
  );

  trig_t      trig_pg0, trig_pg1, trig_rec;
  state_rpt_t state_rpt;
  logic       pg0_busy, pg1_busy, rec_busy;

  sequencer u_seq (
    .clk, .rst_n,
    .axi_req (m_req[SLV_SEQ]), .axi_rsp(m_rsp[SLV_SEQ]),
    .trig_pg0, .trig_pg1, .trig_rec,
    .state_in(state_rpt),
    .busy    (seq_busy)
  );

  pulse_generator u_pg0 (
    .clk, .rst_n,
    .axi_req(m_req[SLV_PG0]), .axi_rsp(m_rsp[SLV_PG0]),
    .trig   (trig_pg0),
    .dac    (dac0),
    .busy   (pg0_busy)
  );

  pulse_generator u_pg1 (
    .clk, .rst_n,
    .axi_req(m_req[SLV_PG1]), .axi_rsp(m_rsp[SLV_PG1]),
    .trig   (trig_pg1),
    .dac    (dac1),
    .busy   (pg1_busy)
  );

  recording_module u_rec (
    .clk, .rst_n,
    .axi_req  (m_req[SLV_REC]), .axi_rsp(m_rsp[SLV_REC]),
    .adc,
    .trig     (trig_rec),
    .state_out(state_rpt),
    .busy     (rec_busy)
  );

  assign qubit_state = state_rpt;
  assign unit_busy   = {rec_busy, pg1_busy, pg0_busy};

  // The recording module reports a state only at the end of a window it
  // was busy for.
  assert property (@(posedge clk) disable iff (!rst_n)
                   state_rpt.valid |-> $past(rec_busy))
    else $error("state report without an active recording window");

endmodule
