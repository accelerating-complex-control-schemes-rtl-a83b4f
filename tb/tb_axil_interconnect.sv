// tb_axil_interconnect: checks address routing of the AXI4-Lite
// interconnect. Four register slaves (axil_regif, each with a 16-word
// register file kept in this testbench) sit behind the interconnect. The
// test writes a distinct value to every slave and word, checks that each
// write landed in exactly the slave its address selects (by inspecting the
// register files directly), reads every word back through the bus, and
// checks that addresses outside the four windows get DECERR and read 0.
module tb_axil_interconnect;
  import qc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  axil_req_t axi_req;
  axil_rsp_t axi_rsp;
  axil_req_t m_req [N_SLAVES];
  axil_rsp_t m_rsp [N_SLAVES];

  axil_interconnect dut (
    .clk, .rst_n, .s_req(axi_req), .s_rsp(axi_rsp), .m_req, .m_rsp
  );

  logic [31:0] regs [N_SLAVES][16];

  for (genvar s = 0; s < int'(N_SLAVES); s++) begin : g_slv
    logic                   we, re;
    logic [SLV_SEL_LSB-1:0] waddr, raddr;
    logic [31:0]            wdata, rdata;
    axil_regif u_slv (
      .clk, .rst_n, .req(m_req[s]), .rsp(m_rsp[s]),
      .reg_we(we), .reg_waddr(waddr), .reg_wdata(wdata),
      .reg_re(re), .reg_raddr(raddr), .reg_rdata(rdata)
    );
    assign rdata = regs[s][raddr[5:2]];
    always_ff @(posedge clk) if (we) regs[s][waddr[5:2]] <= wdata;
  end

  `include "axil_tasks.svh"

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [31:0] pattern(int s, int w);
    return 32'hA000_0000 | (s << 16) | (w * 32'h111);
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [1:0]  r;
    axil_init();
    for (int s = 0; s < int'(N_SLAVES); s++)
      for (int w = 0; w < 16; w++) regs[s][w] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // one write per slave and word, checked in place
    for (int s = 0; s < int'(N_SLAVES); s++) begin
      for (int w = 0; w < 16; w++) begin
        axil_write(32'(s << SLV_SEL_LSB) | 32'(w * 4), pattern(s, w), r);
        check(r == RESP_OKAY, $sformatf("write resp slave %0d word %0d", s, w));
      end
    end
    for (int s = 0; s < int'(N_SLAVES); s++)
      for (int w = 0; w < 16; w++)
        check(regs[s][w] == pattern(s, w),
              $sformatf("slave %0d word %0d holds %h", s, w, regs[s][w]));

    // read back through the bus, in a scrambled order
    for (int k = 0; k < 64; k++) begin
      int s, w;
      s = (k * 7) % int'(N_SLAVES);
      w = (k * 5) % 16;
      axil_read(32'(s << SLV_SEL_LSB) | 32'(w * 4), d, r);
      check(r == RESP_OKAY && d == pattern(s, w),
            $sformatf("read slave %0d word %0d got %h", s, w, d));
    end

    // unmapped windows
    for (int s = int'(N_SLAVES); s < 16; s += 3) begin
      axil_write(32'(s << SLV_SEL_LSB), 32'hDEAD_BEEF, r);
      check(r == RESP_DECERR, $sformatf("unmapped write %0d resp %0d", s, r));
      axil_read(32'(s << SLV_SEL_LSB) | 32'h10, d, r);
      check(r == RESP_DECERR && d == 0, $sformatf("unmapped read %0d resp %0d", s, r));
    end
    // nothing changed by the unmapped writes
    for (int s = 0; s < int'(N_SLAVES); s++)
      check(regs[s][0] == pattern(s, 0), "slave untouched by unmapped write");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
