// tb_test_ctrl: exercises the test controller with register accesses
// driven directly (no JTAG) and a simple fixed-latency unit model that
// returns a checksum of the issued operands and bypass fields. Checks RAM
// write/read-back, that bubbles are not issued, that fetch stops at the
// last instruction, results land in order, the run length in cycles, the
// status bits, and that RAM writes are ignored during a run.
module tb_test_ctrl;
  import fpmax_pkg::*;
  localparam int LAT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid = 0;
  acc_req_t acc_req;
  logic [63:0] acc_rdata, res;
  fpu_sel_e sel;
  fpu_req_t req;
  logic res_valid, busy, done;
  logic [64:0] pipe [LAT];
  int n_issue = 0;
  int checks = 0, failures = 0;

  test_ctrl u (.clk, .rst_n, .acc_valid, .acc_req, .acc_rdata, .fpu_sel(sel), .req,
               .res_valid, .res, .busy, .done);

  function automatic logic [63:0] model(fpu_req_t r);
    return r.a ^ {r.b[62:0], r.b[63]} ^ {r.c[61:0], r.c[63:62]} ^ 64'({r.a_byp, r.a_dist, r.b_byp, r.c_byp});
  endfunction

  // fixed-latency unit
  always @(posedge clk) begin
    pipe[0] <= {req.valid, model(req)};
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    if (req.valid) n_issue++;
  end
  assign {res_valid, res} = rst_n ? pipe[LAT-1] : '0;

  task automatic acc(input logic we, input space_e sp, input logic [7:0] a, input logic [63:0] d);
    @(negedge clk);
    acc_req = '{we: we, space: sp, addr: a, wdata: d};
    acc_valid = 1;
    @(negedge clk);
    acc_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] A [64], B [64], C [64];
  inst_t prog [30];
  logic [63:0] exp_q [$];

  initial begin
    for (int i = 0; i < LAT; i++) pipe[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      A[i] = {$urandom, $urandom}; B[i] = {$urandom, $urandom}; C[i] = {$urandom, $urandom};
      acc(1, SP_OPA, 8'(i), A[i]); acc(1, SP_OPB, 8'(i), B[i]); acc(1, SP_OPC, 8'(i), C[i]);
    end
    acc(0, SP_OPB, 8'd7, '0);
    chk(acc_rdata == B[7], "operand read back");
    // program: 20 instructions, the 20th has last=1; 21..29 must not run
    for (int i = 0; i < 30; i++) begin
      inst_t in;
      in = inst_t'($urandom);
      in.valid = (i % 4 != 2);
      in.last  = (i == 19);
      prog[i] = in;
      acc(1, SP_INST, 8'(i), 64'(in));
      if (i < 20 && in.valid) begin
        fpu_req_t r;
        r = '0;
        r.valid = 1; r.a_byp = in.a_byp; r.a_dist = in.a_dist; r.b_byp = in.b_byp; r.c_byp = in.c_byp;
        r.a = A[in.a_addr]; r.b = B[in.b_addr]; r.c = C[in.c_addr];
        exp_q.push_back(model(r));
      end
    end
    acc(0, SP_INST, 8'd3, '0);
    chk(acc_rdata[INST_W-1:0] == prog[3], "instruction read back");
    acc(1, SP_CTRL, 8'd0, 64'h102);            // select unit 2, start
    chk(busy, "busy during run");
    chk(sel == FPU_DP_FMA, "unit select");
    acc(1, SP_OPA, 8'd0, 64'hFFFF);            // ignored while busy
    wait (done);
    acc(0, SP_CTRL, 8'd0, '0);
    chk(acc_rdata[9] && !acc_rdata[8], "done and not busy");
    chk(int'(acc_rdata[24:16]) == exp_q.size(), "result count");
    // fetch + operand read + 20 slots + LAT + 1
    chk(int'(acc_rdata[63:32]) == 20 + LAT + 3, $sformatf("run cycles %0d", acc_rdata[63:32]));
    chk(n_issue == exp_q.size(), "bubbles not issued");
    acc(0, SP_OPA, 8'd0, '0);
    chk(acc_rdata == A[0], "write during run ignored");
    for (int k = 0; exp_q.size() > 0; k++) begin
      logic [63:0] e;
      e = exp_q.pop_front();
      acc(0, SP_RES, 8'(k), '0);
      chk(acc_rdata == e, $sformatf("result %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
