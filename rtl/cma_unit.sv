// cma_unit: latency-optimised cascade multiply-add pipeline, R = A + B * C.
//
// Defaults are the single-precision CMA (6 stages: 3-stage Booth-2
// multiplier with a Wallace tree, 2-stage two-path adder, 1 rounding stage). The double-
// precision CMA is the same module with EW=11, MW=52, STAGES=5,
// MUL_DEPTH=2, BOOTH=3. The multiplier produces the exact product, which is
// not rounded; the two-path adder (cma_adder) adds the addend to it and a
// single rounding follows, so the result equals that of a fused operation.
// Stage map: multiplier in stages 1..MUL_DEPTH while A waits in a register
// chain; adder and rounding decision in stages MUL_DEPTH+1..STAGES-1; the
// last stage adds the rounding increment. Result of an operation issued in
// cycle t appears on out_valid/out_res in cycle t+STAGES.
// out_res is 64 bits wide for all units; a single-precision configuration
// drives bits [31:0] and holds the upper half at zero.
// Internal bypasses: the unrounded result {inc, word} in the register at
// the end of stage STAGES-1 can be
//  * a multiplier input B or C of the operation issued STAGES-1 cycles
//    later (multiply latency STAGES-1: 4 for DP, 5 for SP), or
//  * the addend A of an operation issued a_dist cycles later, for any
//    a_dist from STAGES-MUL_DEPTH-1 (accumulate latency: 2) to STAGES-1.
//    The value is picked up at the A register of stage STAGES-a_dist, or
//    directly at the adder input when that stage is the adder's first one.
// The instruction names the source (a_byp, a_dist, b_byp, c_byp); there is
// no hazard detection. Where inside the multiplier and adder groups the
// pipeline registers sit is left to retiming.
module cma_unit
  import fpmax_pkg::*;
#(
  parameter int EW        = 8,
  parameter int MW        = 23,
  parameter int STAGES    = 6,
  parameter int MUL_DEPTH = 3,
  parameter int BOOTH     = 2,
  parameter tree_e TREE   = TREE_WALLACE
) (
  input  logic           clk,
  input  logic           rst_n,
  input  fpu_req_t       req,
  output logic           out_valid,
  output logic [63:0]    out_res,
  output logic           close_used     // an operation took the close path this cycle
);
  localparam int N  = EW + MW + 1;
  localparam int P  = MW + 1;
  localparam int XW = EW + 5;
  localparam int Q  = 2 * P + 2;
  localparam int ADD_DEPTH = STAGES - MUL_DEPTH - 1;

  logic                 f_valid, f_inc;
  logic [N-1:0]         f_word;

  // ---------------- multiplier: stages 1..MUL_DEPTH -----------------------
  logic [N:0]           opb, opc;
  logic                 sb, sc, nb, nc, ib, ic, zb, zc;
  logic [P:0]           sigb, sigc;
  logic signed [XW-1:0] eb, ec;
  logic [2*P+1:0]       prod;

  assign opb = req.b_byp ? {f_inc, f_word} : {1'b0, req.b[N-1:0]};
  assign opc = req.c_byp ? {f_inc, f_word} : {1'b0, req.c[N-1:0]};

  fp_unpack #(.EW(EW), .MW(MW), .XW(XW)) u_upb (.inc(opb[N]), .word(opb[N-1:0]), .sign(sb),
    .is_nan(nb), .is_inf(ib), .is_zero(zb), .sig(sigb), .elsb(eb));
  fp_unpack #(.EW(EW), .MW(MW), .XW(XW)) u_upc (.inc(opc[N]), .word(opc[N-1:0]), .sign(sc),
    .is_nan(nc), .is_inf(ic), .is_zero(zc), .sig(sigc), .elsb(ec));

  booth_mult #(.N(P+1), .BOOTH(BOOTH), .TREE(TREE)) u_mul (.x(sigb), .y(sigc), .p(prod));

  typedef struct packed {
    logic                 valid;
    logic [2*P+1:0]       prod;
    logic signed [XW-1:0] pe;
    logic                 ps, pz, pnan, pinf;
  } mul_t;

  // A operand travelling beside the multiplier
  typedef struct packed {
    logic       byp;
    logic [2:0] adist;
    logic [N:0] op;      // {inc, word}
  } aop_t;

  mul_t m_in;
  mul_t m_q [MUL_DEPTH];
  aop_t a_in  [MUL_DEPTH+1];   // A entering stage k+1
  aop_t a_eff [MUL_DEPTH+1];   // A after the bypass pick-up of stage k+1
  aop_t a_q   [MUL_DEPTH];

  always_comb begin
    m_in.valid = req.valid;
    m_in.prod  = prod;
    m_in.pe    = eb + ec;
    m_in.ps    = sb ^ sc;
    m_in.pz    = zb || zc;
    m_in.pnan  = nb || nc || (ib && zc) || (ic && zb);
    m_in.pinf  = (ib && !zc) || (ic && !zb);
  end

  always_comb begin
    a_in[0] = '{byp: req.a_byp, adist: req.a_dist, op: {1'b0, req.a[N-1:0]}};
    for (int k = 1; k <= MUL_DEPTH; k++) a_in[k] = a_q[k-1];
    for (int k = 0; k <= MUL_DEPTH; k++) begin
      a_eff[k] = a_in[k];
      // stage k+1 picks up the producer issued a_dist cycles earlier
      if (a_in[k].byp && (int'(a_in[k].adist) == STAGES - (k + 1)))
        a_eff[k].op = {f_inc, f_word};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MUL_DEPTH; i++) begin
        m_q[i] <= '0;
        a_q[i] <= '0;
      end
    end else begin
      m_q[0] <= m_in;
      a_q[0] <= a_eff[0];
      for (int i = 1; i < MUL_DEPTH; i++) begin
        m_q[i] <= m_q[i-1];
        a_q[i] <= a_eff[i];
      end
    end
  end

  // ---------------- adder: stages MUL_DEPTH+1 .. STAGES-1 -----------------
  mul_t                 m;
  aop_t                 aa;
  logic                 sa, na, ia, za;
  logic [P:0]           siga;
  logic signed [XW-1:0] ea;
  logic                 s_sign, s_zero, s_close, r_inc, nan, inf, inf_sign;
  logic [Q+3:0]         s_sig;
  logic signed [XW-1:0] s_emsb;
  logic [N-1:0]         r_word;

  assign m  = m_q[MUL_DEPTH-1];
  assign aa = a_eff[MUL_DEPTH];

  fp_unpack #(.EW(EW), .MW(MW), .XW(XW)) u_upa (.inc(aa.op[N]), .word(aa.op[N-1:0]), .sign(sa),
    .is_nan(na), .is_inf(ia), .is_zero(za), .sig(siga), .elsb(ea));

  cma_adder #(.EW(EW), .MW(MW), .XW(XW)) u_add (
    .prod(m.prod), .pe(m.pe), .ps(m.ps), .pz(m.pz),
    .add(siga), .ae(ea), .as_(sa), .az(za),
    .sign(s_sign), .sig(s_sig), .emsb(s_emsb), .zero(s_zero), .close_sel(s_close));

  assign nan      = m.pnan || na || (m.pinf && ia && (m.ps != sa));
  assign inf      = m.pinf || ia;
  assign inf_sign = m.pinf ? m.ps : sa;

  fp_round #(.EW(EW), .MW(MW), .SW(Q+4), .XW(XW)) u_rnd (
    .sign(inf ? inf_sign : s_sign), .sig(s_sig), .emsb(s_emsb), .sticky_in(1'b0),
    .zero(s_zero), .nan(nan), .inf(inf), .inc(r_inc), .word(r_word));

  assign close_used = m.valid && s_close && !nan && !inf;

  logic [N+1:0] r_q [ADD_DEPTH];   // {valid, inc, word}
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ADD_DEPTH; i++) r_q[i] <= '0;
    end else begin
      r_q[0] <= {m.valid, r_inc, r_word};
      for (int i = 1; i < ADD_DEPTH; i++) r_q[i] <= r_q[i-1];
    end
  end
  assign {f_valid, f_inc, f_word} = r_q[ADD_DEPTH-1];

  // ---------------- rounding stage -----------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_res   <= '0;
    end else begin
      out_valid <= f_valid;
      out_res   <= 64'({f_word[N-1], f_word[N-2:0] + (N-1)'(f_inc)});
    end
  end

  mul_fwd_dist: assert property (@(posedge clk) disable iff (!rst_n)
    (req.valid && (req.b_byp || req.c_byp)) |-> f_valid);
  acc_fwd_dist: assert property (@(posedge clk) disable iff (!rst_n)
    (req.valid && req.a_byp) |-> (int'(req.a_dist) >= ADD_DEPTH && int'(req.a_dist) <= STAGES - 1));
endmodule
