// axil_interconnect: one AXI4-Lite master (the processing system) to
// N_SLV register slaves (the FPGA modules), routed by address.
//
// Address bits [SEL_LSB +: SEL_W] select the slave; offsets inside a slave's
// window are passed through unchanged. A write is routed by AWADDR and the
// route is held from the first AWVALID until the B handshake, so the W
// channel and the response always go to and come from the same slave; reads
// are routed by ARADDR and held until the R handshake. Channels are wired
// through combinationally, adding no latency. An address that selects no
// slave is answered by the interconnect itself with DECERR after one cycle
// (reads return 0). The paper states that all modules are reached through a
// register-based AXI4-Lite bus mapped into the processors' physical address
// space; the window size and this routing scheme are this design's choices.
module axil_interconnect
  import qc_pkg::*;
#(
  parameter int unsigned N_SLV   = N_SLAVES,
  parameter int unsigned SEL_LSB = SLV_SEL_LSB,
  parameter int unsigned SEL_W   = SLV_SEL_W
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output axil_req_t m_req [N_SLV],
  input  axil_rsp_t m_rsp [N_SLV]
);

  // ---------------- write path ----------------
  logic             wr_hold_q;
  logic [SEL_W-1:0] wr_sel_q, wr_sel;
  logic             wr_err_bvalid_q;
  logic             wr_err_done_q;     // error write accepted, response pending/sent

  assign wr_sel = wr_hold_q ? wr_sel_q : s_req.awaddr[SEL_LSB +: SEL_W];
  logic wr_active;
  assign wr_active = wr_hold_q || s_req.awvalid;
  logic wr_err;
  assign wr_err = (int'(wr_sel) >= int'(N_SLV));

  // ---------------- read path -----------------
  logic             rd_hold_q;
  logic [SEL_W-1:0] rd_sel_q, rd_sel;
  logic             rd_err_rvalid_q;

  assign rd_sel = rd_hold_q ? rd_sel_q : s_req.araddr[SEL_LSB +: SEL_W];
  logic rd_err;
  assign rd_err = (int'(rd_sel) >= int'(N_SLV));

  always_comb begin
    s_rsp = '0;
    for (int i = 0; i < int'(N_SLV); i++) begin
      m_req[i]         = s_req;
      m_req[i].awvalid = 1'b0;
      m_req[i].wvalid  = 1'b0;
      m_req[i].bready  = 1'b0;
      m_req[i].arvalid = 1'b0;
      m_req[i].rready  = 1'b0;
      if (wr_active && !wr_err && int'(wr_sel) == i) begin
        m_req[i].awvalid = s_req.awvalid;
        m_req[i].wvalid  = s_req.wvalid;
        m_req[i].bready  = s_req.bready;
        s_rsp.awready    = m_rsp[i].awready;
        s_rsp.wready     = m_rsp[i].wready;
        s_rsp.bvalid     = m_rsp[i].bvalid;
        s_rsp.bresp      = m_rsp[i].bresp;
      end
      if ((rd_hold_q || s_req.arvalid) && !rd_err && int'(rd_sel) == i) begin
        m_req[i].arvalid = s_req.arvalid;
        m_req[i].rready  = s_req.rready;
        s_rsp.arready    = m_rsp[i].arready;
        s_rsp.rvalid     = m_rsp[i].rvalid;
        s_rsp.rdata      = m_rsp[i].rdata;
        s_rsp.rresp      = m_rsp[i].rresp;
      end
    end
    if (wr_active && wr_err) begin
      s_rsp.awready = s_req.awvalid && s_req.wvalid && !wr_err_done_q;
      s_rsp.wready  = s_req.awvalid && s_req.wvalid && !wr_err_done_q;
      s_rsp.bvalid  = wr_err_bvalid_q;
      s_rsp.bresp   = RESP_DECERR;
    end
    if ((rd_hold_q || s_req.arvalid) && rd_err) begin
      s_rsp.arready = s_req.arvalid && !rd_err_rvalid_q;
      s_rsp.rvalid  = rd_err_rvalid_q;
      s_rsp.rdata   = '0;
      s_rsp.rresp   = RESP_DECERR;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_hold_q       <= 1'b0;
      wr_sel_q        <= '0;
      wr_err_bvalid_q <= 1'b0;
      wr_err_done_q   <= 1'b0;
      rd_hold_q       <= 1'b0;
      rd_sel_q        <= '0;
      rd_err_rvalid_q <= 1'b0;
    end else begin
      // write route: hold from first AWVALID to B handshake
      if (s_rsp.bvalid && s_req.bready) begin
        wr_hold_q <= 1'b0;
      end else if (s_req.awvalid && !wr_hold_q) begin
        wr_hold_q <= 1'b1;
        wr_sel_q  <= wr_sel;
      end
      if (s_rsp.awready && s_rsp.wready && wr_err) begin
        wr_err_bvalid_q <= 1'b1;
        wr_err_done_q   <= 1'b1;
      end else if (wr_err_bvalid_q && s_req.bready) begin
        wr_err_bvalid_q <= 1'b0;
        wr_err_done_q   <= 1'b0;
      end
      // read route: hold from first ARVALID to R handshake
      if (s_rsp.rvalid && s_req.rready) begin
        rd_hold_q <= 1'b0;
      end else if (s_req.arvalid && !rd_hold_q) begin
        rd_hold_q <= 1'b1;
        rd_sel_q  <= rd_sel;
      end
      if (s_rsp.arready && rd_err)               rd_err_rvalid_q <= 1'b1;
      else if (rd_err_rvalid_q && s_req.rready)  rd_err_rvalid_q <= 1'b0;
    end
  end

endmodule
