// sequencer: the FPGA's timing engine. It runs a small program that fires
// triggers to the two pulse generators and the recording module on an exact
// 4 ns (one clock) grid, can wait for the qubit state that the recording
// module reports back and branch on it, and, after each run, times the qubit
// relaxation delay so that software can start the next run only when the
// qubit has decayed to its ground state.
//
// Program memory holds PROG_DEPTH 64-bit instructions (see qc_pkg::instr_t):
//   END            stop, clear busy, start the relaxation timer
//   WAIT b         the next instruction issues b clocks later (b = 0 acts as 1)
//   TRIG a,b       fire the triggers in mask a[2:0] = {rec, pg1, pg0}, argument b
//   WAIT_STATE     stall until a state report has arrived in this run, latch it
//   BRANCH_STATE a,b  if the latched state equals a[0], continue at b
//   JUMP b         continue at b
// Every other instruction takes one clock. Triggers are registered: a TRIG
// issued in clock t is seen by the modules in clock t+1.
//
// Registers (byte offsets in the module window, AXI4-Lite via axil_regif):
//   0x0000 START   W  start the program at pc = wdata (ignored while busy)
//   0x0004 STATUS  R  {.., state_seen, state, relaxed, busy}
//   0x0008 RELAX   RW relaxation delay in clocks, counted from END
//   0x000C PC      R  current program counter
//   0x0010 RUNS    R  number of completed runs
//   0x8000 + 8*i   RW instruction i, low word; +4 high word
//
// The paper gives the function: scheduling in 4 ns steps, triggering the
// pulse generators and the recording, conditional sequences on a reported
// qubit state, a busy flag, start at a program counter, and waiting for
// qubit relaxation (the driver calls of its example task). The instruction
// set, the register map and the program size are this design's choices.
module sequencer
  import qc_pkg::*;
#(
  parameter int unsigned PROG_DEPTH = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  axi_req,
  output axil_rsp_t  axi_rsp,
  output trig_t      trig_pg0,
  output trig_t      trig_pg1,
  output trig_t      trig_rec,
  input  state_rpt_t state_in,
  output logic       busy
);

  localparam int unsigned PC_W = $clog2(PROG_DEPTH);

  // ---------------- register port ----------------
  logic                  reg_we, reg_re;
  logic [SLV_SEL_LSB-1:0] reg_waddr, reg_raddr;
  logic [AXI_DW-1:0]     reg_wdata, reg_rdata;

  axil_regif u_regif (
    .clk, .rst_n, .req(axi_req), .rsp(axi_rsp),
    .reg_we, .reg_waddr, .reg_wdata, .reg_re, .reg_raddr, .reg_rdata
  );

  // ---------------- program memory ----------------
  logic [63:0] prog [PROG_DEPTH];
  logic        prog_we;
  logic [PC_W-1:0] prog_widx, prog_ridx;

  assign prog_we   = reg_we && reg_waddr[15];
  assign prog_widx = reg_waddr[3 +: PC_W];
  assign prog_ridx = reg_raddr[3 +: PC_W];

  always_ff @(posedge clk) begin
    if (prog_we) begin
      if (reg_waddr[2]) prog[prog_widx][63:32] <= reg_wdata;
      else              prog[prog_widx][31:0]  <= reg_wdata;
    end
  end

  // ---------------- execution ----------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT, S_WAIT_STATE} state_e;
  state_e     st_q;
  logic [PC_W-1:0] pc_q;
  logic [31:0]     wait_q;
  logic [31:0]     relax_cfg_q, relax_cnt_q;
  logic            state_seen_q, state_q;
  logic [31:0]     runs_q;
  instr_t          ins;

  assign ins  = instr_t'(prog[pc_q]);
  assign busy = (st_q != S_IDLE);

  logic start;
  assign start = reg_we && !reg_waddr[15] && (reg_waddr[7:0] == 8'h00) && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= S_IDLE;
      pc_q         <= '0;
      wait_q       <= '0;
      relax_cfg_q  <= '0;
      relax_cnt_q  <= '0;
      state_seen_q <= 1'b0;
      state_q      <= 1'b0;
      runs_q       <= '0;
      trig_pg0     <= '0;
      trig_pg1     <= '0;
      trig_rec     <= '0;
    end else begin
      trig_pg0.valid <= 1'b0;
      trig_pg1.valid <= 1'b0;
      trig_rec.valid <= 1'b0;

      if (reg_we && !reg_waddr[15] && reg_waddr[7:0] == 8'h08) relax_cfg_q <= reg_wdata;
      if (relax_cnt_q != 0 && !busy) relax_cnt_q <= relax_cnt_q - 1;

      // state reports are collected whenever a run is active
      if (busy && state_in.valid) begin
        state_seen_q <= 1'b1;
        state_q      <= state_in.state;
      end

      unique case (st_q)
        S_IDLE: if (start) begin
          st_q         <= S_RUN;
          pc_q         <= reg_wdata[PC_W-1:0];
          state_seen_q <= 1'b0;
        end
        S_WAIT: begin
          if (wait_q <= 32'd1) st_q <= S_RUN;
          wait_q <= wait_q - 1;
        end
        S_WAIT_STATE: if (state_seen_q || state_in.valid) begin
          st_q         <= S_RUN;
          state_seen_q <= 1'b0;
          if (!state_seen_q) state_q <= state_in.state;
        end
        S_RUN: begin
          pc_q <= pc_q + 1'b1;
          unique case (ins.op)
            OP_END: begin
              st_q        <= S_IDLE;
              relax_cnt_q <= relax_cfg_q;
              runs_q      <= runs_q + 1;
            end
            OP_WAIT: if (ins.b > 32'd1) begin
              st_q   <= S_WAIT;
              wait_q <= ins.b - 1;
            end
            OP_TRIG: begin
              if (ins.a[TRIG_PG0]) trig_pg0 <= '{valid: 1'b1, arg: ins.b};
              if (ins.a[TRIG_PG1]) trig_pg1 <= '{valid: 1'b1, arg: ins.b};
              if (ins.a[TRIG_REC]) trig_rec <= '{valid: 1'b1, arg: ins.b};
            end
            OP_WAIT_STATE: begin
              if (state_seen_q || state_in.valid) begin
                state_seen_q <= 1'b0;
                if (!state_seen_q) state_q <= state_in.state;
              end else begin
                st_q <= S_WAIT_STATE;
              end
            end
            OP_BRANCH_STATE: if (state_q == ins.a[0]) pc_q <= ins.b[PC_W-1:0];
            OP_JUMP: pc_q <= ins.b[PC_W-1:0];
            default: begin
              st_q        <= S_IDLE;     // undefined opcode ends the run
              relax_cnt_q <= relax_cfg_q;
              runs_q      <= runs_q + 1;
            end
          endcase
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- register read ----------------
  always_comb begin
    reg_rdata = '0;
    if (reg_raddr[15]) begin
      reg_rdata = reg_raddr[2] ? prog[prog_ridx][63:32] : prog[prog_ridx][31:0];
    end else begin
      unique case (reg_raddr[7:0])
        8'h04: reg_rdata = {28'd0, state_seen_q, state_q,
                            (relax_cnt_q == 0) && !busy, busy};
        8'h08: reg_rdata = relax_cfg_q;
        8'h0C: reg_rdata = 32'(pc_q);
        8'h10: reg_rdata = runs_q;
        default: reg_rdata = '0;
      endcase
    end
  end

endmodule
