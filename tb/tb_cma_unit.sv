// tb_cma_unit: checks the cascade multiply-add pipeline in both of the
// chip's configurations, single precision (6 stages, 3-stage Booth-2
// multiplier) and double precision (5 stages, 2-stage Booth-3 multiplier),
// against the wide-integer reference model. Covers forwarding into the
// multiplier inputs (distance STAGES-1) and into the addend at every
// distance from 2 to STAGES-1, the 6- and 5-cycle latencies, and both adder
// paths.
module tb_cma_unit;
  import fpmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fpu_req_t    req_s, req_d;
  logic        ov_s, ov_d, done_s, done_d, cl_s, cl_d;
  logic [63:0] or_s, or_d;
  int ch_s, ch_d, fl_s, fl_d, mb_s, mb_d;
  int ab_s [8];
  int ab_d [8];
  int n_close = 0;
  int checks = 0, failures = 0;

  cma_unit u_sp (.clk, .rst_n, .req(req_s), .out_valid(ov_s), .out_res(or_s), .close_used(cl_s));
  cma_unit #(.EW(11), .MW(52), .STAGES(5), .MUL_DEPTH(2), .BOOTH(3))
    u_dp (.clk, .rst_n, .req(req_d), .out_valid(ov_d), .out_res(or_d), .close_used(cl_d));

  fpu_driver #(.EW(8),  .MW(23), .STAGES(6), .ACC_MIN(2), .NOPS(3000)) d_sp (.clk, .rst_n, .req(req_s),
    .out_valid(ov_s), .out_res(or_s), .done(done_s), .checks(ch_s), .failures(fl_s),
    .n_mul_byp(mb_s), .n_acc_byp(ab_s));
  fpu_driver #(.EW(11), .MW(52), .STAGES(5), .ACC_MIN(2), .NOPS(1500)) d_dp (.clk, .rst_n, .req(req_d),
    .out_valid(ov_d), .out_res(or_d), .done(done_d), .checks(ch_d), .failures(fl_d),
    .n_mul_byp(mb_d), .n_acc_byp(ab_d));

  always @(posedge clk) if (cl_s || cl_d) n_close++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  initial begin
    wait (done_s && done_d);
    checks = ch_s + ch_d;
    failures = fl_s + fl_d;
    if (ch_s != 3000) failures++;
    if (ch_d != 1500) failures++;
    // every accumulation distance 2..STAGES-1 and the multiply bypass
    for (int d = 2; d <= 5; d++) begin checks++; if (ab_s[d] == 0) failures++; end
    for (int d = 2; d <= 4; d++) begin checks++; if (ab_d[d] == 0) failures++; end
    checks += 3;
    if (mb_s == 0) failures++;
    if (mb_d == 0) failures++;
    if (n_close == 0) failures++;
    $display("SP: %0d results, mul byp %0d, acc byp d2..5: %0d %0d %0d %0d", ch_s, mb_s, ab_s[2], ab_s[3], ab_s[4], ab_s[5]);
    $display("DP: %0d results, mul byp %0d, acc byp d2..4: %0d %0d %0d", ch_d, mb_d, ab_d[2], ab_d[3], ab_d[4]);
    $display("close-path operations: %0d", n_close);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
