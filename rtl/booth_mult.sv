// booth_mult: unsigned N x N significand multiplier with Booth recoding and
// a carry-save partial-product reduction.
//
// BOOTH selects the recoding: 2 = radix-4 (digits -2..2, multiples X, 2X),
// 3 = radix-8 (digits -4..4, multiples X, 2X, 3X, 4X; 3X is the one "hard"
// multiple, formed once by an adder). The multiplier y is zero-extended and
// cut into overlapping groups of BOOTH+1 bits; each group selects a signed
// multiple of x (two's complement over the full accumulation width),
// shifted by BOOTH bits per digit.
// TREE selects how the partial products are reduced to two rows by 3:2
// carry-save adders before one carry-propagate adder:
//   TREE_WALLACE - a Wallace tree: at every level the rows are taken three
//                  at a time, so the depth grows with log1.5 of the rows;
//   TREE_ARRAY   - a linear array: one carry-save adder per partial product,
//                  each adding the next row to the running sum and carry.
// The chip uses Booth-2 with a Wallace tree in the SP CMA, Booth-3 with a
// Wallace tree in the DP CMA, Booth-3 with an array in the DP FMA and
// Booth-3 with a "ZM" modified array in the SP FMA. The ZM structure is
// only named, so here it is built as the plain array (this design's choice).
// Purely combinational, no clock.
module booth_mult
  import fpmax_pkg::*;
#(
  parameter int    N     = 25,
  parameter int    BOOTH = 3,
  parameter tree_e TREE  = TREE_WALLACE
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  output logic [2*N-1:0] p
);
  localparam int ND = (N + BOOTH) / BOOTH;      // digits: covers N bits plus a zero sign bit
  localparam int YW = ND * BOOTH + 1;           // recoded multiplier width incl. the appended 0
  localparam int AW = 2 * N + BOOTH + 4;        // accumulation width

  // rows left after one Wallace level: every three rows become two
  function automatic int next_rows(int n);
    return 2 * (n / 3) + n % 3;
  endfunction
  function automatic int wallace_levels(int n);
    int l;
    l = 0;
    while (n > 2) begin n = next_rows(n); l++; end
    return l;
  endfunction
  function automatic int rows_at(int n, int lvl);
    for (int i = 0; i < lvl; i++) n = next_rows(n);
    return n;
  endfunction

  localparam int NL = wallace_levels(ND);

  logic [YW-1:0] ye;
  logic [AW-1:0] x1, x2, x3, x4;
  logic [AW-1:0] pp [ND];

  // ---------------- Booth recoding and partial products ----------------
  always_comb begin
    ye = '0;
    ye[N:1] = y;
    x1 = AW'(x);
    x2 = x1 << 1;
    x3 = x1 + x2;
    x4 = x1 << 2;
    for (int i = 0; i < ND; i++) begin
      logic [BOOTH:0] g;
      logic           neg;
      int             mag;
      logic [AW-1:0]  m;
      g   = ye[i*BOOTH +: BOOTH+1];
      neg = g[BOOTH];
      // digit = -g[B]*2^(B-1) + sum_{j=1}^{B-1} g[j]*2^(j-1) + g[0]
      mag = 0;
      for (int j = 1; j < BOOTH; j++) mag += int'(g[j]) << (j - 1);
      mag += int'(g[0]);
      if (neg) mag = (1 << (BOOTH - 1)) - mag;
      case (mag)
        1:       m = x1;
        2:       m = x2;
        3:       m = x3;
        4:       m = x4;
        default: m = '0;
      endcase
      if (neg) m = ~m + AW'(1);
      pp[i] = m << (i * BOOTH);
    end
  end

  // ---------------- reduction to two rows ----------------
  logic [AW-1:0] sum_row, carry_row;

  if (TREE == TREE_WALLACE && ND > 2) begin : g_wallace
    for (genvar l = 0; l <= NL; l++) begin : lv
      logic [AW-1:0] r [rows_at(ND, l)];
      if (l == 0) begin : g_in
        always_comb for (int i = 0; i < ND; i++) r[i] = pp[i];
      end else begin : g_csa
        localparam int NI = rows_at(ND, l - 1);
        always_comb begin
          for (int t = 0; t < NI / 3; t++) begin
            logic [AW-1:0] a, b, c;
            a = lv[l-1].r[3*t];
            b = lv[l-1].r[3*t+1];
            c = lv[l-1].r[3*t+2];
            r[2*t]   = a ^ b ^ c;
            r[2*t+1] = ((a & b) | (a & c) | (b & c)) << 1;
          end
          for (int k = 0; k < NI % 3; k++) r[2*(NI/3) + k] = lv[l-1].r[3*(NI/3) + k];
        end
      end
    end
    assign sum_row   = lv[NL].r[0];
    assign carry_row = lv[NL].r[1];
  end else begin : g_array
    always_comb begin
      logic [AW-1:0] s, c, a;
      s = pp[0];
      c = (ND > 1) ? pp[1] : '0;
      for (int i = 2; i < ND; i++) begin
        a = pp[i];
        {s, c} = {s ^ c ^ a, ((s & c) | (s & a) | (c & a)) << 1};
      end
      sum_row   = s;
      carry_row = c;
    end
  end

  // final carry-propagate adder
  logic [AW-1:0] total;
  assign total = sum_row + carry_row;
  assign p     = total[2*N-1:0];
endmodule
