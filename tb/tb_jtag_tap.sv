// tb_jtag_tap: drives the TAP through the JTAG tester model. Checks the
// IDCODE after a TAP reset, the one-bit BYPASS register, that an ACCESS
// scan produces exactly one acc_valid pulse with the shifted fields, and
// that acc_rdata is captured and shifted out on the next scan.
module tb_jtag_tap;
  import fpmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tck, tms, tdi, tdo, acc_valid;
  acc_req_t acc_req, last_req;
  logic [63:0] acc_rdata;
  int n_pulse = 0;
  int checks = 0, failures = 0;

  jtag_tap u (.clk, .rst_n, .tck, .tms, .tdi, .tdo, .acc_valid, .acc_req, .acc_rdata);
  jtag_bfm bfm (.clk, .tck, .tms, .tdi, .tdo);

  always @(posedge clk) if (acc_valid) begin n_pulse++; last_req <= acc_req; end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [ACC_W-1:0] d;
    acc_req_t r;
    acc_rdata = 64'hDEAD_BEEF_CAFE_F00D;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bfm.reset_tap();
    bfm.scan_dr('0, 32, d);
    chk(d[31:0] == 32'h0FA0_0001, "IDCODE after reset");
    // BYPASS: one-bit register, data comes out one TCK later
    bfm.load_ir(4'b1111);
    bfm.scan_dr(ACC_W'(8'b1011_0110), 9, d);
    chk(d[8:1] == 8'b1011_0110 && d[0] == 1'b0, "BYPASS delay");
    chk(n_pulse == 0, "no access pulse outside ACCESS");
    bfm.load_ir(4'b1000);
    for (int k = 0; k < 20; k++) begin
      int p0;
      r = '{we: 1'($urandom), space: space_e'($urandom_range(0, 5)), addr: 8'($urandom),
            wdata: {$urandom, $urandom}};
      p0 = n_pulse;
      acc_rdata = {$urandom, $urandom};
      bfm.scan_dr(ACC_W'(r), ACC_W, d);
      repeat (4) @(posedge clk);
      chk(n_pulse == p0 + 1, "one access pulse per scan");
      chk(last_req == r, "access fields");
      chk(d[63:0] == acc_rdata, "captured read data shifted out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
