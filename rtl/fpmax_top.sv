// fpmax_top: the FPMax test chip. Four multiply-add units and a built-in
// test harness reached through JTAG.
//
// Units (parameters from the chip's performance summary):
//   0 SP FMA: single precision, fused, 4 stages, 2-stage Booth-3 multiplier,
//             ZM array (built as a plain array)
//   1 SP CMA: single precision, cascade, 6 stages, 3-stage Booth-2 multiplier,
//             Wallace tree
//   2 DP FMA: double precision, fused, 6 stages, 2-stage Booth-3 multiplier,
//             array
//   3 DP CMA: double precision, cascade, 5 stages, 2-stage Booth-3 multiplier,
//             Wallace tree
// All compute R = A + B * C with one round-to-nearest-even rounding and
// forward their unrounded result to dependent operations.
// Test flow: over JTAG (jtag_tap) the tester writes a program into the
// instruction RAM and operands into the operand RAMs, selects a unit and
// starts a run; test_ctrl then issues one instruction per clk cycle to the
// selected unit through fpu_selector and stores the results, which the
// tester reads back over JTAG. Each unit sits in its own power domain on
// the chip; power supplies and body bias are not modelled here.
// Ports: clk (core clock), rst_n (asynchronous active-low reset), the four
// JTAG pins, and busy/done of the test controller for observation.
module fpmax_top
  import fpmax_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic tck,
  input  logic tms,
  input  logic tdi,
  output logic tdo,
  output logic busy,
  output logic done
);
  logic        acc_valid;
  acc_req_t    acc_req;
  logic [63:0] acc_rdata;
  fpu_sel_e    sel;
  fpu_req_t    req;
  fpu_req_t    fpu_req   [NUM_FPU];
  logic        fpu_valid [NUM_FPU];
  logic [63:0] fpu_res   [NUM_FPU];
  logic        res_valid;
  logic [63:0] res;

  jtag_tap u_jtag (.clk, .rst_n, .tck, .tms, .tdi, .tdo,
    .acc_valid, .acc_req, .acc_rdata);

  test_ctrl u_ctrl (.clk, .rst_n, .acc_valid, .acc_req, .acc_rdata,
    .fpu_sel(sel), .req, .res_valid, .res, .busy, .done);

  fpu_selector u_sel (.sel, .req, .fpu_req, .fpu_valid, .fpu_res, .res_valid, .res);

  fma_unit #(.EW(8), .MW(23), .STAGES(4), .MUL_DEPTH(2), .BOOTH(3), .TREE(TREE_ARRAY)) u_sp_fma (
    .clk, .rst_n, .req(fpu_req[FPU_SP_FMA]), .out_valid(fpu_valid[FPU_SP_FMA]), .out_res(fpu_res[FPU_SP_FMA]));
  cma_unit #(.EW(8), .MW(23), .STAGES(6), .MUL_DEPTH(3), .BOOTH(2), .TREE(TREE_WALLACE)) u_sp_cma (
    .clk, .rst_n, .req(fpu_req[FPU_SP_CMA]), .out_valid(fpu_valid[FPU_SP_CMA]), .out_res(fpu_res[FPU_SP_CMA]),
    .close_used());
  fma_unit #(.EW(11), .MW(52), .STAGES(6), .MUL_DEPTH(2), .BOOTH(3), .TREE(TREE_ARRAY)) u_dp_fma (
    .clk, .rst_n, .req(fpu_req[FPU_DP_FMA]), .out_valid(fpu_valid[FPU_DP_FMA]), .out_res(fpu_res[FPU_DP_FMA]));
  cma_unit #(.EW(11), .MW(52), .STAGES(5), .MUL_DEPTH(2), .BOOTH(3), .TREE(TREE_WALLACE)) u_dp_cma (
    .clk, .rst_n, .req(fpu_req[FPU_DP_CMA]), .out_valid(fpu_valid[FPU_DP_CMA]), .out_res(fpu_res[FPU_DP_CMA]),
    .close_used());
endmodule
