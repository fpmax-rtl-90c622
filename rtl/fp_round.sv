// fp_round: rounding decision for a normalised, unrounded sum.
//
// Input: sign, a significand of SW bits with its MSB at bit SW-1 (or all
// zero), the unbiased exponent of that MSB, a sticky bit for anything
// already dropped, and the special-case flags of the operation. The block
// forms the biased exponent, shifts the significand right when the result
// is subnormal, keeps MW fraction bits, and makes the IEEE round-to-nearest-
// even decision from the round bit, the sticky bits and the last kept bit.
// Output is the unrounded result {inc, word}: word holds the truncated
// result and inc = 1 when rounding adds one unit in the last place. Adding
// inc to the low EW+MW bits of word completes rounding, including the
// carry into the exponent and the overflow to infinity. This two-part form
// is what the FPUs forward to dependent operations before rounding.
// Exponent overflow before rounding gives infinity (round to nearest).
// Only round-to-nearest-even is implemented; the paper says the units
// round in an IEEE-compliant way but names no other modes. Combinational.
module fp_round #(
  parameter int EW = 8,
  parameter int MW = 23,
  parameter int SW = 80,
  parameter int XW = EW + 5
) (
  input  logic                 sign,
  input  logic [SW-1:0]        sig,
  input  logic signed [XW-1:0] emsb,
  input  logic                 sticky_in,
  input  logic                 zero,
  input  logic                 nan,
  input  logic                 inf,
  output logic                 inc,
  output logic [EW+MW:0]       word
);
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int EMAX = (1 << EW) - 1;

  logic signed [XW-1:0] eb;
  logic [2*SW-1:0]      t;
  logic [SW-1:0]        s2;
  logic                 st;
  logic                 rb;
  logic [MW-1:0]        frac;
  int                   d;

  always_comb begin
    eb = emsb + XW'(BIAS);
    d  = (eb >= 1) ? 0 : ((int'(eb) < 1 - SW) ? SW : 1 - int'(eb));
    t  = {sig, {SW{1'b0}}} >> d;
    s2 = t[2*SW-1:SW];
    frac = s2[SW-2 -: MW];
    rb   = s2[SW-2-MW];
    st   = sticky_in || (t[SW-1:0] != '0);
    for (int i = 0; i < SW-2-MW; i++) st = st | s2[i];
    inc  = 1'b0;
    if (nan) begin
      word = {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
    end else if (inf || (eb >= EMAX)) begin
      word = {sign, {EW{1'b1}}, {MW{1'b0}}};
    end else if (zero) begin
      word = {sign, {(EW+MW){1'b0}}};
    end else begin
      word = {sign, (eb >= 1) ? eb[EW-1:0] : {EW{1'b0}}, frac};
      inc  = rb && (st || frac[0]);
    end
  end
endmodule
