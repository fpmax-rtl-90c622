// tb_sram_1r1w: writes random words to a 256 x 64 test RAM and a 64 x 26
// one, reads them back and checks the one-cycle read latency and that the
// read data holds while re is low.
module tb_sram_1r1w;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re, we2, re2;
  logic [7:0] wa, ra;  logic [63:0] wd, rd;
  logic [5:0] wa2, ra2; logic [25:0] wd2, rd2;
  logic [63:0] model [256];
  logic [25:0] model2 [64];
  int checks = 0, failures = 0;

  sram_1r1w u0 (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rd));
  sram_1r1w #(.W(26), .D(64)) u1 (.clk, .we(we2), .waddr(wa2), .wdata(wd2), .re(re2), .raddr(ra2), .rdata(rd2));

  initial begin
    we = 0; re = 0; we2 = 0; re2 = 0;
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      we = 1; wa = 8'(i); wd = {$urandom, $urandom}; model[i] = wd;
      we2 = (i < 64); wa2 = 6'(i); wd2 = 26'($urandom); if (i < 64) model2[i] = wd2;
      @(negedge clk);
    end
    we = 0; we2 = 0;
    for (int k = 0; k < 600; k++) begin
      ra = 8'($urandom); ra2 = 6'($urandom); re = 1; re2 = 1;
      @(negedge clk);
      checks += 2;
      if (rd !== model[ra]) failures++;
      if (rd2 !== model2[ra2]) failures++;
      // hold: rdata keeps its value while re is low
      re = 0; re2 = 0; ra = ra + 1;
      @(negedge clk);
      checks++;
      if (rd !== model[ra - 8'd1]) failures++;
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
