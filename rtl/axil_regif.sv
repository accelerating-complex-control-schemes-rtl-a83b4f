// axil_regif: AXI4-Lite slave front end that turns bus transactions into a
// simple register port for one FPGA module.
//
// A write is accepted when both AWVALID and WVALID are high and no write
// response is pending; AWREADY and WREADY are raised together for that one
// cycle, reg_we pulses in the same cycle with the address and data, and
// BVALID follows one cycle later and is held until BREADY. A read is
// accepted when ARVALID is high and no read data is pending; reg_re pulses
// with the address, the module returns reg_rdata combinationally from that
// address in the same cycle, and it is registered into RDATA with RVALID
// one cycle later. One transaction per direction is in flight at a time,
// which is all a processor doing single-word register accesses needs. The
// address passed on is the byte offset inside the module's window. The
// paper states only that every module is reached through register-based
// AXI4-Lite; this handshake timing is this design's choice.
module axil_regif
  import qc_pkg::*;
#(
  parameter int unsigned OFFS_W = SLV_SEL_LSB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         req,
  output axil_rsp_t         rsp,
  // register port
  output logic              reg_we,
  output logic [OFFS_W-1:0] reg_waddr,
  output logic [AXI_DW-1:0] reg_wdata,
  output logic              reg_re,
  output logic [OFFS_W-1:0] reg_raddr,
  input  logic [AXI_DW-1:0] reg_rdata
);

  logic              bvalid_q, rvalid_q;
  logic [AXI_DW-1:0] rdata_q;

  assign reg_we    = req.awvalid && req.wvalid && !bvalid_q;
  assign reg_waddr = req.awaddr[OFFS_W-1:0];
  assign reg_wdata = req.wdata;
  assign reg_re    = req.arvalid && !rvalid_q;
  assign reg_raddr = req.araddr[OFFS_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (reg_we)                         bvalid_q <= 1'b1;
      else if (bvalid_q && req.bready)    bvalid_q <= 1'b0;
      if (reg_re) begin
        rvalid_q <= 1'b1;
        rdata_q  <= reg_rdata;
      end else if (rvalid_q && req.rready) rvalid_q <= 1'b0;
    end
  end

  always_comb begin
    rsp         = '0;
    rsp.awready = reg_we;
    rsp.wready  = reg_we;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = RESP_OKAY;
    rsp.arready = reg_re;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = RESP_OKAY;
  end

  // AXI rule: a response, once valid, stays valid until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp.bvalid && !req.bready |=> rsp.bvalid)
    else $error("BVALID dropped before BREADY");
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp.rvalid && !req.rready |=> rsp.rvalid && $stable(rsp.rdata))
    else $error("RVALID/RDATA changed before RREADY");

endmodule
