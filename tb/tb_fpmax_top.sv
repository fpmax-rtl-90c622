// tb_fpmax_top: end-to-end test of the FPMax chip through its JTAG pins, at
// the chip's own sizes (no parameter of the top is changed).
//
// For each of the four units it loads the operand RAMs and a program of
// NI instructions over JTAG, selects the unit, starts a run, waits for
// done, checks the run length in cycles, reads every result back over JTAG
// and compares it with the reference model. Programs contain bubbles,
// multiply bypasses (B or C from the operation STAGES-1 cycles earlier) and
// accumulate bypasses at every distance the unit supports; the expected
// value of a forwarded operand is the producer's expected result. Also
// checks the IDCODE and counts how often each mechanism occurred. Operand
// entries 0..7 hold triples whose sum cancels, to drive the CMA close path.
module tb_fpmax_top;
  import fpmax_pkg::*;
  import fp_ref_pkg::*;
  import fp_stim_pkg::*;

  localparam int NI = 40;                    // instructions per run

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tck, tms, tdi, tdo, busy, done;

  fpmax_top dut (.clk, .rst_n, .tck, .tms, .tdi, .tdo, .busy, .done);
  jtag_bfm  bfm (.clk, .tck, .tms, .tdi, .tdo);

  int checks = 0, failures = 0;
  int n_bubble = 0, n_mul_byp = 0, n_close = 0, n_last = 0;
  int n_acc_byp [8];
  int n_run [4];

  always @(posedge clk) if (dut.u_sp_cma.close_used || dut.u_dp_cma.close_used) n_close++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // unit properties: format, stages, smallest accumulate distance
  function automatic int u_ew(int u);     return (u < 2) ? 8 : 11; endfunction
  function automatic int u_mw(int u);     return (u < 2) ? 23 : 52; endfunction
  function automatic int u_stages(int u); return (u == 0) ? 4 : (u == 1) ? 6 : (u == 2) ? 6 : 5; endfunction
  function automatic int u_accmin(int u); return (u == 0) ? 3 : (u == 2) ? 5 : 2; endfunction

  logic [63:0] opa [64], opb [64], opc [64];

  task automatic load_operands(int ew, int mw);
    for (int i = 0; i < 64; i++) begin
      int near;
      near = $urandom_range(1, (1 << ew) - 2);
      opa[i] = rnd_fp(ew, mw, near);
      opb[i] = rnd_fp(ew, mw, near / 2 + (1 << (ew - 2)));
      opc[i] = rnd_fp(ew, mw, near / 2 + (1 << (ew - 2)));
      // entries 0..7: A = -round(B*C), so A + B*C cancels almost completely
      if (i < 8) opa[i] = fma_ref(ew, mw, 64'd0, opb[i], opc[i]) ^ (64'd1 << (ew + mw));
      bfm.write(SP_OPA, 8'(i), opa[i]);
      bfm.write(SP_OPB, 8'(i), opb[i]);
      bfm.write(SP_OPC, 8'(i), opc[i]);
    end
  endtask

  task automatic run_unit(int u);
    inst_t       prog [NI];
    logic [63:0] expv [NI];
    bit          vld  [NI];
    logic [63:0] exp_q [$];
    logic [63:0] rd, mask;
    int ew, mw, st, nvalid, cyc, nres;
    ew = u_ew(u); mw = u_mw(u); st = u_stages(u);
    mask = (ew == 8) ? 64'hFFFF_FFFF : '1;
    nvalid = 0;
    for (int i = 0; i < NI; i++) begin
      inst_t in;
      logic [63:0] a, b, c;
      int d;
      in = '0;
      in.valid  = (i == NI - 1) || ($urandom_range(0, 7) != 0);
      in.last   = (i == NI - 1);
      in.a_addr = 6'($urandom_range(0, 63));
      in.b_addr = 6'($urandom_range(0, 63));
      in.c_addr = 6'($urandom_range(0, 63));
      if ($urandom_range(0, 3) == 0) begin            // a cancelling triple
        in.a_addr = 6'($urandom_range(0, 7));
        in.b_addr = in.a_addr;
        in.c_addr = in.a_addr;
      end
      a = opa[in.a_addr] & mask; b = opb[in.b_addr] & mask; c = opc[in.c_addr] & mask;
      if (in.valid) begin
        d = $urandom_range(u_accmin(u), st - 1);
        if (i >= d && vld[i - d] && $urandom_range(0, 2) == 0) begin
          in.a_byp = 1; in.a_dist = 3'(d); a = expv[i - d]; n_acc_byp[d]++;
        end
        if (i >= st - 1 && vld[i - st + 1]) begin
          if ($urandom_range(0, 3) == 0) begin in.b_byp = 1; b = expv[i - st + 1]; end
          if ($urandom_range(0, 3) == 0) begin in.c_byp = 1; c = expv[i - st + 1]; end
          if (in.b_byp || in.c_byp) n_mul_byp++;
        end
        expv[i] = fma_ref(ew, mw, a, b, c);
        exp_q.push_back(expv[i]);
        nvalid++;
      end else n_bubble++;
      vld[i] = in.valid;
      prog[i] = in;
      bfm.write(SP_INST, 8'(i), 64'(prog[i]));
    end
    n_last++;
    bfm.write(SP_CTRL, 8'd0, 64'(u) | (64'd1 << 8));   // select and start
    do bfm.read(SP_CTRL, 8'd0, rd); while (!rd[9]);
    cyc  = int'(rd[63:32]);
    nres = int'(rd[24:16]);
    chk(rd[1:0] == 2'(u), "unit select readback");
    chk(nres == nvalid, $sformatf("unit %0d: %0d results, expected %0d", u, nres, nvalid));
    // fetch (1) + operand read (1) + NI issue slots + STAGES + 1 cycle to see the last result retire
    chk(cyc == NI + st + 3, $sformatf("unit %0d: run took %0d cycles, expected %0d", u, cyc, NI + st + 3));
    for (int k = 0; k < nvalid; k++) begin
      logic [63:0] e;
      e = exp_q.pop_front();
      bfm.read(SP_RES, 8'(k), rd);
      chk(rd == e, $sformatf("unit %0d result %0d: got %h expected %h", u, k, rd, e));
    end
    n_run[u]++;
  endtask

  initial begin
    logic [ACC_W-1:0] d;
    logic [63:0] rd;
    for (int i = 0; i < 8; i++) n_acc_byp[i] = 0;
    for (int i = 0; i < 4; i++) n_run[i] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    bfm.reset_tap();
    bfm.scan_dr('0, 32, d);
    chk(d[31:0] == 32'h0FA0_0001, "IDCODE");
    bfm.load_ir(4'b1000);
    // RAM write/read back through JTAG
    bfm.write(SP_OPA, 8'd5, 64'h0123_4567_89AB_CDEF);
    bfm.read(SP_OPA, 8'd5, rd);
    chk(rd == 64'h0123_4567_89AB_CDEF, "operand RAM readback");
    load_operands(8, 23);
    run_unit(0);
    run_unit(1);
    load_operands(11, 52);
    run_unit(2);
    run_unit(3);
    // every mechanism must have happened
    for (int u = 0; u < 4; u++) chk(n_run[u] == 1, $sformatf("unit %0d run", u));
    chk(n_bubble > 0, "bubbles issued");
    chk(n_mul_byp > 0, "multiply bypass used");
    for (int dd = 2; dd <= 5; dd++) chk(n_acc_byp[dd] > 0, $sformatf("accumulate bypass distance %0d used", dd));
    chk(n_close > 0, "CMA close path used");
    $display("bubbles %0d, mul bypasses %0d, acc bypasses d2..5: %0d %0d %0d %0d, close path %0d",
             n_bubble, n_mul_byp, n_acc_byp[2], n_acc_byp[3], n_acc_byp[4], n_acc_byp[5], n_close);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
