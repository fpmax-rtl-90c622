// sram_1r1w: on-chip test RAM with one write port and one read port.
//
// Used for the instruction RAM (256 x 26), the three operand RAMs
// (64 x 64 each) and the results RAM (256 x 64) of the test harness; the
// sizes are the chip's. Writes take effect at the clock edge; reads are
// synchronous: rdata shows the word at raddr one cycle after re is high,
// and holds otherwise. Contents are not reset. Writing it as a register
// array (rather than a foundry macro) is this design's choice.
module sram_1r1w #(
  parameter int W = 64,
  parameter int D = 256,
  parameter int A = $clog2(D)
) (
  input  logic         clk,
  input  logic         we,
  input  logic [A-1:0] waddr,
  input  logic [W-1:0] wdata,
  input  logic         re,
  input  logic [A-1:0] raddr,
  output logic [W-1:0] rdata
);
  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
