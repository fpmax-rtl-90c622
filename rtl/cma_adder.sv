// cma_adder: two-path floating-point adder of the cascade multiply-add
// (CMA) units, adding the exact, unrounded product to the addend.
//
// Both inputs are first brought to the same width Q = 2P+2 with the MSB at
// the top (the product needs at most a one-bit shift, the addend is padded
// below). Then, as in a classic two-path adder:
//  * close path - effective subtraction with exponent difference of at most
//    one: the operands are subtracted exactly and the difference, which may
//    have many leading zeros, is normalised by a leading-zero count;
//  * far path - every other case: the operand with the smaller exponent is
//    aligned right (dropped bits go into a sticky bit), added or subtracted,
//    and the result needs at most a small normalising shift.
// The close-path result is chosen for an effective subtraction whose
// exponent difference is at most one, the far path otherwise. Output is a
// normalised significand with its MSB exponent for fp_round. The paper's
// close path uses a leading-zero anticipator in parallel with the
// subtractor; here the count is taken on the difference (this design's
// choice). Combinational.
module cma_adder #(
  parameter int EW = 8,
  parameter int MW = 23,
  parameter int XW = EW + 5,
  parameter int P  = MW + 1,
  parameter int Q  = 2 * P + 2
) (
  input  logic [2*P+1:0]       prod,
  input  logic signed [XW-1:0] pe,
  input  logic                 ps,
  input  logic                 pz,
  input  logic [P:0]           add,
  input  logic signed [XW-1:0] ae,
  input  logic                 as_,
  input  logic                 az,
  output logic                 sign,
  output logic [Q+3:0]         sig,       // normalised, MSB at bit Q+3
  output logic signed [XW-1:0] emsb,      // exponent of sig bit Q+3
  output logic                 zero,
  output logic                 close_sel  // close path chosen (for test visibility)
);
  logic [Q-1:0]         x, y, xl, ys;
  logic signed [XW-1:0] ex, ey, el, exl;
  logic signed [XW:0]   d;
  logic                 sub, swap;
  // close path
  logic [Q:0]           cx, cy, cr;
  logic                 csign;
  int                   clz;
  // far path
  logic [2*Q-1:0]       t;
  logic [Q+3:0]         fx, fy, fr;
  logic                 fsign;
  int                   ad, flz;

  always_comb begin
    // normalise product to MSB at Q-1
    if (prod[Q-1]) begin x = prod;      ex = pe;          end
    else           begin x = prod << 1; ex = pe - XW'(1); end
    y  = {add, {(Q-P-1){1'b0}}};
    ey = ae - XW'(Q - P - 1);
    sub = ps ^ as_;
    d   = (XW+1)'(ex) - (XW+1)'(ey);

    // ---------------- close path ----------------
    if (d == 1)       begin cx = {x, 1'b0};  cy = {1'b0, y}; el = ey; end
    else if (d == 0)  begin cx = {1'b0, x};  cy = {1'b0, y}; el = ey; end
    else              begin cx = {1'b0, x};  cy = {y, 1'b0}; el = ex; end
    if (cx >= cy) begin cr = cx - cy; csign = ps;  end
    else          begin cr = cy - cx; csign = as_; end
    clz = 0;
    for (int i = 0; i <= Q; i++) if (cr[i]) clz = Q - i;

    // ---------------- far path ----------------
    swap = az ? 1'b0 : (pz ? 1'b1 : (d < 0));
    xl   = swap ? y  : x;
    exl  = swap ? ey : ex;
    ys   = swap ? x  : y;
    ad   = (pz || az) ? 2 * Q : ((d < 0) ? int'(-d) : int'(d));
    if (ad > 2 * Q) ad = 2 * Q;
    t  = {ys, {Q{1'b0}}} >> ad;
    fx = {1'b0, xl, 3'b000};
    fy = {1'b0, t[2*Q-1 -: Q+2], (t[Q-3:0] != '0)};
    if (pz && az) fy = '0;
    if (!sub) fr = fx + fy;
    else      fr = fx - fy;
    fsign = swap ? as_ : ps;
    flz = 0;
    for (int i = Q; i <= Q+3; i++) if (fr[i]) flz = Q + 3 - i;

    // ---------------- select ----------------
    close_sel = sub && !pz && !az && (d >= -1) && (d <= 1);
    if (close_sel) begin
      sig  = {cr << clz, 3'b000};
      emsb = el + XW'(Q) - XW'(clz);
      sign = csign;
      zero = (cr == '0);
    end else begin
      sig  = fr << flz;
      emsb = exl + XW'(Q) - XW'(flz);
      sign = fsign;
      zero = (fr == '0);
    end
    if (zero) sign = (pz && az) ? (ps && as_) : 1'b0;
    if (pz && az) zero = 1'b1;
  end
endmodule
