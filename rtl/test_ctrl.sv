// test_ctrl: built-in test controller. Holds the test RAMs and the program
// counter, runs a test at full FPU speed and gives JTAG access to the RAMs.
//
// Memories (sizes from the chip): instruction RAM 256 x 26 bits, operand
// RAMs A, B and C of 64 x 64 bits, results RAM 256 x 64 bits.
// Control register (address space SP_CTRL, via JTAG):
//   write: [1:0] FPU select, [8] start a test run
//   read : [1:0] FPU select, [8] busy, [9] done, [24:16] results written,
//          [63:32] cycles the last run took from start to done
// A run: the PC fetches one instruction per cycle from address 0 on. One
// cycle later the instruction's A, B and C addresses read the operand RAMs;
// one cycle after that the operation (or a bubble, valid = 0) is issued to
// the selected FPU. Fetch stops after an instruction with last = 1 (or at
// the end of the RAM); the run ends when every issued operation has
// returned. Results are written to the results RAM in issue order from
// address 0. JTAG accesses to the RAMs are served only while no run is in
// progress; a read returns the word one cycle later in acc_rdata. This
// three-stage fetch/read/issue sequence, the control register layout and
// the instruction format (fpmax_pkg::inst_t) are this design's choices.
module test_ctrl
  import fpmax_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // register access from JTAG
  input  logic        acc_valid,
  input  acc_req_t    acc_req,
  output logic [63:0] acc_rdata,
  // FPU side
  output fpu_sel_e    fpu_sel,
  output fpu_req_t    req,
  input  logic        res_valid,
  input  logic [63:0] res,
  output logic        busy,
  output logic        done
);
  // ---------------- memories ----------------
  logic                  i_we, i_re, a_we, a_re, b_we, b_re, c_we, c_re, r_we, r_re;
  logic [7:0]            i_raddr, r_waddr;
  logic [5:0]            a_raddr, b_raddr, c_raddr;
  logic [INST_W-1:0]     i_rdata;
  logic [63:0]           a_rdata, b_rdata, c_rdata, r_rdata;

  sram_1r1w #(.W(INST_W), .D(INST_DEPTH)) u_inst (.clk, .we(i_we), .waddr(acc_req.addr),
    .wdata(acc_req.wdata[INST_W-1:0]), .re(i_re), .raddr(i_raddr), .rdata(i_rdata));
  sram_1r1w #(.W(64), .D(OPND_DEPTH)) u_opa (.clk, .we(a_we), .waddr(acc_req.addr[5:0]),
    .wdata(acc_req.wdata), .re(a_re), .raddr(a_raddr), .rdata(a_rdata));
  sram_1r1w #(.W(64), .D(OPND_DEPTH)) u_opb (.clk, .we(b_we), .waddr(acc_req.addr[5:0]),
    .wdata(acc_req.wdata), .re(b_re), .raddr(b_raddr), .rdata(b_rdata));
  sram_1r1w #(.W(64), .D(OPND_DEPTH)) u_opc (.clk, .we(c_we), .waddr(acc_req.addr[5:0]),
    .wdata(acc_req.wdata), .re(c_re), .raddr(c_raddr), .rdata(c_rdata));
  sram_1r1w #(.W(64), .D(RES_DEPTH)) u_res (.clk, .we(r_we), .waddr(r_waddr),
    .wdata(res), .re(r_re), .raddr(acc_req.addr), .rdata(r_rdata));

  // ---------------- sequencer state ----------------
  logic [7:0]  pc;
  logic        fetch_active, f1_v, f2_v, fetch_now;
  inst_t       inst, i2;
  logic [8:0]  outstanding, n_res;
  logic [31:0] cycles;
  logic        jt_rd;        // JTAG read in flight
  space_e      jt_space;

  assign inst      = inst_t'(i_rdata);
  assign fetch_now = busy && fetch_active && !(f1_v && inst.last);

  wire jt_acc = acc_valid && !busy;
  wire jt_wr  = jt_acc && acc_req.we;

  always_comb begin
    i_we = jt_wr && acc_req.space == SP_INST;
    a_we = jt_wr && acc_req.space == SP_OPA;
    b_we = jt_wr && acc_req.space == SP_OPB;
    c_we = jt_wr && acc_req.space == SP_OPC;
    r_we = res_valid && busy;
    r_waddr = n_res[7:0];
    // read ports: sequencer while running, JTAG otherwise
    i_re    = fetch_now || (jt_acc && !acc_req.we && acc_req.space == SP_INST);
    i_raddr = busy ? pc : acc_req.addr;
    a_re    = (busy && f1_v) || (jt_acc && !acc_req.we && acc_req.space == SP_OPA);
    b_re    = (busy && f1_v) || (jt_acc && !acc_req.we && acc_req.space == SP_OPB);
    c_re    = (busy && f1_v) || (jt_acc && !acc_req.we && acc_req.space == SP_OPC);
    a_raddr = busy ? inst.a_addr : acc_req.addr[5:0];
    b_raddr = busy ? inst.b_addr : acc_req.addr[5:0];
    c_raddr = busy ? inst.c_addr : acc_req.addr[5:0];
    r_re    = jt_acc && !acc_req.we && acc_req.space == SP_RES;
    // issue
    req        = '0;
    req.valid  = f2_v && i2.valid;
    req.a_byp  = i2.a_byp;
    req.a_dist = i2.a_dist;
    req.b_byp  = i2.b_byp;
    req.c_byp  = i2.c_byp;
    req.a      = a_rdata;
    req.b      = b_rdata;
    req.c      = c_rdata;
    if (!req.valid) req = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fpu_sel      <= FPU_SP_FMA;
      busy         <= 1'b0;
      done         <= 1'b0;
      pc           <= '0;
      fetch_active <= 1'b0;
      f1_v         <= 1'b0;
      f2_v         <= 1'b0;
      i2           <= '0;
      outstanding  <= '0;
      n_res        <= '0;
      cycles       <= '0;
      jt_rd        <= 1'b0;
      jt_space     <= SP_INST;
      acc_rdata    <= '0;
    end else begin
      // JTAG side
      jt_rd <= jt_acc && !acc_req.we && acc_req.space != SP_CTRL;
      if (jt_acc && !acc_req.we) jt_space <= acc_req.space;
      if (jt_rd) begin
        unique case (jt_space)
          SP_INST: acc_rdata <= 64'(i_rdata);
          SP_OPA:  acc_rdata <= a_rdata;
          SP_OPB:  acc_rdata <= b_rdata;
          SP_OPC:  acc_rdata <= c_rdata;
          default: acc_rdata <= r_rdata;
        endcase
      end
      if (acc_valid && !acc_req.we && acc_req.space == SP_CTRL)
        acc_rdata <= {cycles, 7'd0, n_res, 6'd0, done, busy, 6'd0, fpu_sel};
      if (jt_wr && acc_req.space == SP_CTRL) begin
        fpu_sel <= fpu_sel_e'(acc_req.wdata[1:0]);
        if (acc_req.wdata[8]) begin
          busy         <= 1'b1;
          done         <= 1'b0;
          pc           <= '0;
          fetch_active <= 1'b1;
          outstanding  <= '0;
          n_res        <= '0;
          cycles       <= '0;
        end
      end
      // sequencer
      if (busy) begin
        cycles <= cycles + 1;
        f1_v   <= fetch_now;
        if (fetch_now) begin
          pc <= pc + 1;
          if (pc == 8'(INST_DEPTH - 1)) fetch_active <= 1'b0;
        end
        if (f1_v && inst.last) fetch_active <= 1'b0;
        f2_v <= f1_v;
        if (f1_v) i2 <= inst;
        outstanding <= outstanding + 9'(req.valid) - 9'(res_valid);
        if (res_valid) n_res <= n_res + 1;
        if (!fetch_active && !f1_v && !f2_v && outstanding == 0 && !res_valid) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  no_result_when_idle: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> busy);
  no_issue_when_idle:  assert property (@(posedge clk) disable iff (!rst_n) req.valid |-> busy);
endmodule
