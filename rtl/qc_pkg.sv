// qc_pkg: types and constants shared by the qubit-control FPGA modules.
//
// The converters run at 1 GS/s per channel and the sequencer schedules in
// 4 ns steps, so the whole fabric runs in one 250 MHz clock domain and every
// sample stream carries SPC = 4 samples per clock. Those two numbers follow
// the platform description; the 250 MHz clock itself is derived from them.
// The AXI4-Lite request/response bundles are structs so that they can cross
// the top-level ports as plain signals. Register-map offsets, instruction
// encoding and widths other than the 16-bit sample are this design's choices.
package qc_pkg;

  // ---- sample streams -------------------------------------------------
  localparam int unsigned SPC      = 4;   // samples per clock (1 GS/s / 250 MHz)
  localparam int unsigned SAMPLE_W = 16;  // converter sample and IQ trace width

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef sample_t [SPC-1:0]          sample_vec_t;  // [0] is the earliest sample

  // ---- NCO ------------------------------------------------------------
  localparam int unsigned PHASE_W = 32;   // NCO phase word width
  localparam int unsigned LUT_AW  = 10;   // sine table address bits (1024 entries)

  // ---- AXI4-Lite ------------------------------------------------------
  localparam int unsigned AXI_AW = 32;
  localparam int unsigned AXI_DW = 32;

  typedef logic [1:0] axi_resp_t;
  localparam axi_resp_t RESP_OKAY   = 2'b00;
  localparam axi_resp_t RESP_DECERR = 2'b11;

  typedef struct packed {
    logic [AXI_AW-1:0]   awaddr;
    logic                awvalid;
    logic [AXI_DW-1:0]   wdata;
    logic [AXI_DW/8-1:0] wstrb;
    logic                wvalid;
    logic                bready;
    logic [AXI_AW-1:0]   araddr;
    logic                arvalid;
    logic                rready;
  } axil_req_t;

  typedef struct packed {
    logic                awready;
    logic                wready;
    axi_resp_t           bresp;
    logic                bvalid;
    logic                arready;
    logic [AXI_DW-1:0]   rdata;
    axi_resp_t           rresp;
    logic                rvalid;
  } axil_rsp_t;

  // ---- address map (byte addresses) --------------------------------------
  // Each module owns a 64 KiB window selected by address bits [19:16].
  localparam int unsigned SLV_SEL_LSB = 16;
  localparam int unsigned SLV_SEL_W   = 4;
  localparam int unsigned SLV_SEQ     = 0;
  localparam int unsigned SLV_PG0     = 1;  // manipulation pulses
  localparam int unsigned SLV_PG1     = 2;  // readout pulses
  localparam int unsigned SLV_REC     = 3;
  localparam int unsigned N_SLAVES    = 4;

  // ---- trigger bus ----------------------------------------------------
  // One trigger from the sequencer to a pulse generator or the recording
  // module. For a pulse generator arg = {length in clocks, envelope start row};
  // for the recording module arg[15:0] is the integration window in clocks.
  typedef struct packed {
    logic        valid;
    logic [31:0] arg;
  } trig_t;

  // Qubit-state report from the recording module to the sequencer.
  typedef struct packed {
    logic valid;
    logic state;
  } state_rpt_t;

  // ---- sequencer instruction set ------------------------------------------
  typedef enum logic [3:0] {
    OP_END          = 4'd0,  // stop; relaxation timer starts
    OP_WAIT         = 4'd1,  // wait b clocks (4 ns each), b >= 1
    OP_TRIG         = 4'd2,  // fire triggers in mask a[2:0] = {rec, pg1, pg0} with argument b
    OP_WAIT_STATE   = 4'd3,  // wait for a qubit-state report and latch it
    OP_BRANCH_STATE = 4'd4,  // if latched state == a[0] then pc = b
    OP_JUMP         = 4'd5   // pc = b
  } opcode_e;

  typedef struct packed {
    opcode_e     op;   // [63:60]
    logic [27:0] a;    // [59:32]
    logic [31:0] b;    // [31:0]
  } instr_t;

  localparam int unsigned TRIG_PG0 = 0;
  localparam int unsigned TRIG_PG1 = 1;
  localparam int unsigned TRIG_REC = 2;

endpackage
