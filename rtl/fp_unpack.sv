// fp_unpack: turns one FPU operand into sign, class flags and a normalised
// significand with the exponent of its least significant bit.
//
// An operand is {inc, word}: an IEEE-754 word plus a pending round-up bit.
// Operands read from the RAMs have inc = 0. A result forwarded from inside
// an FPU is unrounded: its word is the truncated result and inc says that
// rounding adds one unit in the last place. The increment is applied here,
// in the consumer's operand preparation, so the producer never waits for
// its own rounding increment (this placement is this design's choice).
// Subnormal inputs are normalised with a leading-zero count so that every
// non-zero significand has its MSB at bit P (P = MW + 1), which keeps the
// downstream alignment logic simple. Combinational.
module fp_unpack #(
  parameter int EW = 8,
  parameter int MW = 23,
  parameter int XW = EW + 5               // signed exponent width
) (
  input  logic                 inc,
  input  logic [EW+MW:0]       word,
  output logic                 sign,
  output logic                 is_nan,
  output logic                 is_inf,
  output logic                 is_zero,
  output logic [MW+1:0]        sig,       // P+1 bits, MSB (bit P) set unless zero
  output logic signed [XW-1:0] elsb       // exponent of sig bit 0
);
  localparam int P    = MW + 1;
  localparam int BIAS = (1 << (EW - 1)) - 1;

  logic [EW-1:0] e;
  logic [MW-1:0] f;
  logic [P:0]    s0;
  int            lz;

  always_comb begin
    sign = word[EW+MW];
    e    = word[EW+MW-1:MW];
    f    = word[MW-1:0];
    is_nan = (&e) && (f != '0);
    // max finite value plus a pending increment overflows to infinity
    is_inf = ((&e) && (f == '0)) || (inc && (e == {{(EW-1){1'b1}}, 1'b0}) && (&f));
    s0 = {1'b0, (e != '0), f} + (P+1)'(inc);
    is_zero = (s0 == '0) && !is_nan && !is_inf;
    lz = 0;
    for (int i = 0; i <= P; i++) if (s0[i]) lz = P - i;
    sig  = s0 << lz;
    elsb = XW'((e == '0) ? 1 : int'(e)) - XW'(BIAS + MW) - XW'(lz);
  end
endmodule
