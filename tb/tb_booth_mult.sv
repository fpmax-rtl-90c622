// tb_booth_mult: checks the Booth multiplier. Runs the Booth-2 and Booth-3
// recodings, each with the Wallace tree and with the array reduction, at
// the significand widths the FPUs use (25 and 54 bits) plus a small width
// that is checked exhaustively, and compares with the simulator's product.
module tb_booth_mult;
  import fpmax_pkg::*;
  logic [24:0] x25, y25;  logic [49:0]  p25_2, p25_3;
  logic [53:0] x54, y54;  logic [107:0] p54_2, p54_3;
  logic [5:0]  x6, y6;    logic [11:0]  p6_2, p6_3;
  logic [49:0] a25_2, a25_3;  logic [107:0] a54_2, a54_3;  logic [11:0] a6_2, a6_3;
  int checks = 0, failures = 0;

  booth_mult #(.N(25), .BOOTH(2)) u0 (.x(x25), .y(y25), .p(p25_2));
  booth_mult #(.N(25), .BOOTH(3)) u1 (.x(x25), .y(y25), .p(p25_3));
  booth_mult #(.N(54), .BOOTH(2)) u2 (.x(x54), .y(y54), .p(p54_2));
  booth_mult #(.N(54), .BOOTH(3)) u3 (.x(x54), .y(y54), .p(p54_3));
  booth_mult #(.N(6),  .BOOTH(2)) u4 (.x(x6),  .y(y6),  .p(p6_2));
  booth_mult #(.N(6),  .BOOTH(3)) u5 (.x(x6),  .y(y6),  .p(p6_3));
  booth_mult #(.N(25), .BOOTH(2), .TREE(TREE_ARRAY)) v0 (.x(x25), .y(y25), .p(a25_2));
  booth_mult #(.N(25), .BOOTH(3), .TREE(TREE_ARRAY)) v1 (.x(x25), .y(y25), .p(a25_3));
  booth_mult #(.N(54), .BOOTH(2), .TREE(TREE_ARRAY)) v2 (.x(x54), .y(y54), .p(a54_2));
  booth_mult #(.N(54), .BOOTH(3), .TREE(TREE_ARRAY)) v3 (.x(x54), .y(y54), .p(a54_3));
  booth_mult #(.N(6),  .BOOTH(2), .TREE(TREE_ARRAY)) v4 (.x(x6),  .y(y6),  .p(a6_2));
  booth_mult #(.N(6),  .BOOTH(3), .TREE(TREE_ARRAY)) v5 (.x(x6),  .y(y6),  .p(a6_3));

  task automatic chk(logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH got %h exp %h", got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        x6 = 6'(i); y6 = 6'(j);
        #1;
        chk(128'(p6_2), 128'(i * j));
        chk(128'(p6_3), 128'(i * j));
        chk(128'(a6_2), 128'(i * j));
        chk(128'(a6_3), 128'(i * j));
      end
    for (int k = 0; k < 4000; k++) begin
      x25 = 25'({$urandom, $urandom}); y25 = 25'({$urandom, $urandom});
      x54 = 54'({$urandom, $urandom}); y54 = 54'({$urandom, $urandom});
      if (k == 0) begin x25 = '1; y25 = '1; x54 = '1; y54 = '1; end
      #1;
      chk(128'(p25_2), 128'(x25) * 128'(y25));
      chk(128'(p25_3), 128'(x25) * 128'(y25));
      chk(128'(p54_2), 128'(x54) * 128'(y54));
      chk(128'(p54_3), 128'(x54) * 128'(y54));
      chk(128'(a25_2), 128'(x25) * 128'(y25));
      chk(128'(a25_3), 128'(x25) * 128'(y25));
      chk(128'(a54_2), 128'(x54) * 128'(y54));
      chk(128'(a54_3), 128'(x54) * 128'(y54));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
