// fma_unit: throughput-optimised fused multiply-add pipeline, R = A + B * C
// with a single IEEE round-to-nearest-even rounding.
//
// Defaults are the single-precision FMA (4 stages, 2-stage multiplier,
// Booth-3, partial products reduced by an array: the chip's ZM array is only
// named, so the plain array stands in for it). The double-precision FMA is the same module with EW=11, MW=52,
// STAGES=6. All three operands enter in stage 1: the multiplier (fp_unpack
// and booth_mult) runs in stages 1..MUL_DEPTH, the fused alignment, add,
// normalisation and rounding decision (fma_adder, fp_round) in the
// following STAGES-MUL_DEPTH-1 stages, and the last stage only completes
// rounding (adds the increment) and registers the result.
// Timing: an operation presented with in.valid in cycle t appears on
// out_valid/out_res in cycle t+STAGES. One operation per cycle.
// out_res is 64 bits wide for all units; a single-precision configuration
// drives bits [31:0] and holds the upper half at zero.
// Forwarding: the unrounded result {inc, word} leaves the register at the
// end of stage STAGES-1. An operation issued STAGES-1 cycles after its
// producer may take it as A (a_byp, a_dist = STAGES-1), B (b_byp) or C
// (c_byp); in an FMA all three inputs are consumed in stage 1, so both the
// multiply and the accumulate latency are STAGES-1 cycles. Which operations
// forward is chosen by the instruction; there is no hazard detection.
// The unit's logic is written as one combinational block per group of
// stages followed by pipeline registers; where inside a group the registers
// sit is left to retiming (the paper gives the stage counts, not the cuts).
module fma_unit
  import fpmax_pkg::*;
#(
  parameter int EW        = 8,
  parameter int MW        = 23,
  parameter int STAGES    = 4,
  parameter int MUL_DEPTH = 2,
  parameter int BOOTH     = 3,
  parameter tree_e TREE   = TREE_ARRAY
) (
  input  logic           clk,
  input  logic           rst_n,
  input  fpu_req_t       req,
  output logic           out_valid,
  output logic [63:0]    out_res
);
  localparam int N  = EW + MW + 1;
  localparam int P  = MW + 1;
  localparam int XW = EW + 5;
  localparam int W  = 3 * P + 8;
  localparam int ADD_DEPTH = STAGES - MUL_DEPTH - 1;

  // ---------------- stage 1: operand select, unpack, multiply -------------
  logic                 f_valid, f_inc;       // forward register (end of stage STAGES-1)
  logic [N-1:0]         f_word;
  logic [N:0]           opa, opb, opc;
  logic                 sa, sb, sc, na, nb, nc, ia, ib, ic, za, zb, zc;
  logic [P:0]           siga, sigb, sigc;
  logic signed [XW-1:0] ea, eb, ec;
  logic [2*P+1:0]       prod;

  assign opa = req.a_byp ? {f_inc, f_word} : {1'b0, req.a[N-1:0]};
  assign opb = req.b_byp ? {f_inc, f_word} : {1'b0, req.b[N-1:0]};
  assign opc = req.c_byp ? {f_inc, f_word} : {1'b0, req.c[N-1:0]};

  fp_unpack #(.EW(EW), .MW(MW), .XW(XW)) u_upa (.inc(opa[N]), .word(opa[N-1:0]), .sign(sa),
    .is_nan(na), .is_inf(ia), .is_zero(za), .sig(siga), .elsb(ea));
  fp_unpack #(.EW(EW), .MW(MW), .XW(XW)) u_upb (.inc(opb[N]), .word(opb[N-1:0]), .sign(sb),
    .is_nan(nb), .is_inf(ib), .is_zero(zb), .sig(sigb), .elsb(eb));
  fp_unpack #(.EW(EW), .MW(MW), .XW(XW)) u_upc (.inc(opc[N]), .word(opc[N-1:0]), .sign(sc),
    .is_nan(nc), .is_inf(ic), .is_zero(zc), .sig(sigc), .elsb(ec));

  booth_mult #(.N(P+1), .BOOTH(BOOTH), .TREE(TREE)) u_mul (.x(sigb), .y(sigc), .p(prod));

  typedef struct packed {
    logic                 valid;
    logic [2*P+1:0]       prod;
    logic signed [XW-1:0] pe;
    logic                 ps, pz;
    logic [P:0]           add;
    logic signed [XW-1:0] ae;
    logic                 as_, az;
    logic                 nan, inf, inf_sign;
  } mul_t;

  mul_t m_in;
  mul_t m_q [MUL_DEPTH];

  always_comb begin
    logic pinf;
    pinf         = (ib && !zc) || (ic && !zb);
    m_in.valid   = req.valid;
    m_in.prod    = prod;
    m_in.pe      = eb + ec;
    m_in.ps      = sb ^ sc;
    m_in.pz      = zb || zc;
    m_in.add     = siga;
    m_in.ae      = ea;
    m_in.as_     = sa;
    m_in.az      = za;
    m_in.nan     = na || nb || nc || (ib && zc) || (ic && zb) || (pinf && ia && ((sb ^ sc) != sa));
    m_in.inf     = pinf || ia;
    m_in.inf_sign = pinf ? (sb ^ sc) : sa;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MUL_DEPTH; i++) m_q[i] <= '0;
    end else begin
      m_q[0] <= m_in;
      for (int i = 1; i < MUL_DEPTH; i++) m_q[i] <= m_q[i-1];
    end
  end

  // ---------------- adder stages: align, add, normalise, round decision ---
  mul_t                 m;
  logic                 a_sign, a_zero, r_inc;
  logic [W+1:0]         a_sig;
  logic signed [XW-1:0] a_emsb;
  logic [N-1:0]         r_word;

  assign m = m_q[MUL_DEPTH-1];

  fma_adder #(.EW(EW), .MW(MW), .XW(XW)) u_add (
    .prod(m.prod), .pe(m.pe), .ps(m.ps), .pz(m.pz),
    .add(m.add), .ae(m.ae), .as_(m.as_), .az(m.az),
    .sign(a_sign), .sig(a_sig), .emsb(a_emsb), .zero(a_zero));

  fp_round #(.EW(EW), .MW(MW), .SW(W+2), .XW(XW)) u_rnd (
    .sign(m.inf ? m.inf_sign : a_sign), .sig(a_sig), .emsb(a_emsb), .sticky_in(1'b0),
    .zero(a_zero), .nan(m.nan), .inf(m.inf), .inc(r_inc), .word(r_word));

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

  // ---------------- last stage: complete rounding --------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_res   <= '0;
    end else begin
      out_valid <= f_valid;
      out_res   <= 64'({f_word[N-1], f_word[N-2:0] + (N-1)'(f_inc)});
    end
  end

  // A forwarded operand must come from a real operation, STAGES-1 cycles back.
  a_fwd_src_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (req.valid && (req.a_byp || req.b_byp || req.c_byp)) |-> f_valid);
  a_fwd_dist: assert property (@(posedge clk) disable iff (!rst_n)
    (req.valid && req.a_byp) |-> (int'(req.a_dist) == STAGES - 1));
endmodule
