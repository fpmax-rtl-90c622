// fma_adder: fused addition of the exact product and the addend, as done in
// the throughput-optimised FMA units.
//
// Both the exact product (2P+2 bits) and the addend (P+1 bits) are placed
// in one alignment window of W = 3P+8 bits whose top bit sits just below the
// larger of the two operands' top exponents; the other operand is shifted
// right, and bits that fall off the window collect into a sticky bit kept
// below the window's LSB. The signed sum is then formed in one adder, made
// positive, and normalised with a leading-zero count. The chip's SP FMA
// uses a 72-bit (3P) aligner, a 3:2 carry-save stage, a leading-zero
// anticipator and an incrementer for the upper product bits; this block
// computes the same exact sum with a slightly wider window and an exact
// leading-zero count instead (this design's choice). Sum is exact apart
// from the sticky bit, so one rounding follows in fp_round. Combinational.
module fma_adder #(
  parameter int EW = 8,
  parameter int MW = 23,
  parameter int XW = EW + 5,
  parameter int P  = MW + 1,
  parameter int W  = 3 * P + 8
) (
  input  logic [2*P+1:0]       prod,      // exact product of normalised significands
  input  logic signed [XW-1:0] pe,        // exponent of prod bit 0
  input  logic                 ps,
  input  logic                 pz,        // product is zero
  input  logic [P:0]           add,       // addend significand, MSB at bit P
  input  logic signed [XW-1:0] ae,        // exponent of add bit 0
  input  logic                 as_,
  input  logic                 az,        // addend is zero
  output logic                 sign,
  output logic [W+1:0]         sig,       // normalised, MSB at bit W+1
  output logic signed [XW-1:0] emsb,      // exponent of sig bit W+1
  output logic                 zero
);
  localparam int PW = 2 * P + 2;
  localparam int AW = P + 1;

  logic signed [XW:0] tp, ta, t;
  logic [W-1:0]       pw, aw;
  logic               pst, ast;
  logic [2*W-1:0]     sh;
  logic [W+1:0]       xe, ye, s;
  int                 dp, da, lz;

  always_comb begin
    // exponents just above each operand's MSB position; a zero never wins
    tp = pz ? {1'b1, {XW{1'b0}}} : (XW+1)'(pe) + (XW+1)'(PW);
    ta = az ? {1'b1, {XW{1'b0}}} : (XW+1)'(ae) + (XW+1)'(AW);
    t  = (tp > ta) ? tp : ta;
    dp = (int'(t - tp) > W) ? W : int'(t - tp);
    da = (int'(t - ta) > W) ? W : int'(t - ta);
    if (pz) dp = W;
    if (az) da = W;
    sh  = {prod, {(2*W-PW){1'b0}}} >> dp;
    pw  = sh[2*W-1:W];
    pst = (sh[W-1:0] != '0);
    sh  = {add, {(2*W-AW){1'b0}}} >> da;
    aw  = sh[2*W-1:W];
    ast = (sh[W-1:0] != '0);
    xe = {1'b0, pw, pst};
    ye = {1'b0, aw, ast};
    if (ps == as_) begin
      s    = xe + ye;
      sign = ps;
    end else if (xe >= ye) begin
      s    = xe - ye;
      sign = ps;
    end else begin
      s    = ye - xe;
      sign = as_;
    end
    zero = (s == '0);
    // exact zero: +0 under round-to-nearest unless both terms are -0
    if (zero) sign = (pz && az) ? (ps && as_) : 1'b0;
    lz = 0;
    for (int i = 0; i <= W+1; i++) if (s[i]) lz = W + 1 - i;
    sig  = s << lz;
    emsb = XW'(t) - XW'(lz);
  end
endmodule
