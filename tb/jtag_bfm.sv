// jtag_bfm: JTAG tester model for simulation. Drives TCK/TMS/TDI with a TCK
// period of TCK_HALF*2 clk periods and offers tasks for TAP reset,
// instruction-register loads, data-register scans and the ACCESS register
// reads and writes of the FPMax test harness.
module jtag_bfm
  import fpmax_pkg::*;
#(
  parameter int TCK_HALF = 4    // in clk cycles
) (
  input  logic clk,
  output logic tck,
  output logic tms,
  output logic tdi,
  input  logic tdo
);
  initial begin tck = 0; tms = 1; tdi = 0; end

  // one TCK cycle; returns TDO as sampled at the rising edge
  task automatic clock(input logic m, input logic d, output logic o);
    tms = m; tdi = d;
    repeat (TCK_HALF) @(posedge clk);
    o = tdo;
    tck = 1;
    repeat (TCK_HALF) @(posedge clk);
    tck = 0;
  endtask

  task automatic reset_tap();
    logic o;
    repeat (6) clock(1, 0, o);
    clock(0, 0, o);                       // Run-Test/Idle
  endtask

  task automatic load_ir(input logic [3:0] ir);
    logic o;
    clock(1, 0, o); clock(1, 0, o);       // Select-DR, Select-IR
    clock(0, 0, o); clock(0, 0, o);       // Capture-IR, Shift-IR
    for (int i = 0; i < 4; i++) clock(i == 3, ir[i], o);
    clock(1, 0, o); clock(0, 0, o);       // Update-IR, Run-Test/Idle
  endtask

  // shifts 'len' bits of din (LSB first) and returns what came out
  task automatic scan_dr(input logic [ACC_W-1:0] din, input int len, output logic [ACC_W-1:0] dout);
    logic o;
    dout = '0;
    clock(1, 0, o);                       // Select-DR
    clock(0, 0, o); clock(0, 0, o);       // Capture-DR, Shift-DR
    for (int i = 0; i < len; i++) begin
      clock(i == len - 1, din[i], o);
      dout[i] = o;
    end
    clock(1, 0, o); clock(0, 0, o);       // Update-DR, Run-Test/Idle
  endtask

  task automatic write(input space_e sp, input logic [7:0] addr, input logic [63:0] data);
    logic [ACC_W-1:0] d;
    acc_req_t r;
    r = '{we: 1'b1, space: sp, addr: addr, wdata: data};
    scan_dr(ACC_W'(r), ACC_W, d);
  endtask

  task automatic read(input space_e sp, input logic [7:0] addr, output logic [63:0] data);
    logic [ACC_W-1:0] d;
    acc_req_t r;
    r = '{we: 1'b0, space: sp, addr: addr, wdata: 64'd0};
    scan_dr(ACC_W'(r), ACC_W, d);         // request
    scan_dr(ACC_W'(r), ACC_W, d);         // unload (re-issues the same read)
    data = d[63:0];
  endtask
endmodule
