// tb_fma_unit: checks the FMA pipeline in both of the chip's configurations,
// single precision (4 stages, 2-stage Booth-3 multiplier) and double
// precision (6 stages), against the wide-integer reference model, including
// results forwarded before rounding and the 4- and 6-cycle latencies.
module tb_fma_unit;
  import fpmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fpu_req_t   req_s, req_d;
  logic       ov_s, ov_d, done_s, done_d;
  logic [63:0] or_s, or_d;
  int ch_s, ch_d, fl_s, fl_d, mb_s, mb_d;
  int ab_s [8];
  int ab_d [8];
  int checks = 0, failures = 0;

  fma_unit u_sp (.clk, .rst_n, .req(req_s), .out_valid(ov_s), .out_res(or_s));
  fma_unit #(.EW(11), .MW(52), .STAGES(6), .MUL_DEPTH(2), .BOOTH(3))
    u_dp (.clk, .rst_n, .req(req_d), .out_valid(ov_d), .out_res(or_d));

  fpu_driver #(.EW(8),  .MW(23), .STAGES(4), .ACC_MIN(3), .NOPS(3000)) d_sp (.clk, .rst_n, .req(req_s),
    .out_valid(ov_s), .out_res(or_s), .done(done_s), .checks(ch_s), .failures(fl_s),
    .n_mul_byp(mb_s), .n_acc_byp(ab_s));
  fpu_driver #(.EW(11), .MW(52), .STAGES(6), .ACC_MIN(5), .NOPS(1500)) d_dp (.clk, .rst_n, .req(req_d),
    .out_valid(ov_d), .out_res(or_d), .done(done_d), .checks(ch_d), .failures(fl_d),
    .n_mul_byp(mb_d), .n_acc_byp(ab_d));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  initial begin
    wait (done_s && done_d);
    checks = ch_s + ch_d;
    failures = fl_s + fl_d;
    // each forwarding path must have been exercised
    checks += 4;
    if (mb_s == 0 || ab_s[3] == 0) failures++;
    if (mb_d == 0 || ab_d[5] == 0) failures++;
    if (ch_s != 3000) failures++;
    if (ch_d != 1500) failures++;
    $display("SP: %0d results, %0d mul bypasses, %0d acc bypasses", ch_s, mb_s, ab_s[3]);
    $display("DP: %0d results, %0d mul bypasses, %0d acc bypasses", ch_d, mb_d, ab_d[5]);
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
