// fpu_driver: stimulus and checking for one FPU pipeline in simulation.
//
// Every cycle it issues, with high probability, an operation R = A + B*C
// with random operands (fp_stim_pkg) or a bubble. Some operations take A,
// B or C from an earlier operation through the unit's forwarding path:
// B and C only from the operation issued STAGES-1 cycles before, A from any
// distance ACC_MIN..STAGES-1. The expected result comes from fp_ref_pkg,
// fed with the expected (rounded) result of the producer for forwarded
// operands. Results are checked in order, and each must arrive exactly
// STAGES cycles after issue. Counts how often each forwarding distance was
// used.
module fpu_driver
  import fpmax_pkg::*;
  import fp_stim_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter int EW      = 8,
  parameter int MW      = 23,
  parameter int STAGES  = 4,
  parameter int ACC_MIN = 3,
  parameter int NOPS    = 2000
) (
  input  logic        clk,
  input  logic        rst_n,
  output fpu_req_t    req,
  input  logic        out_valid,
  input  logic [63:0] out_res,
  output logic        done,
  output int          checks,
  output int          failures,
  output int          n_mul_byp,
  output int          n_acc_byp [8]
);
  localparam int N = EW + MW + 1;
  localparam int H = 64;

  logic [N-1:0] ra, rb, rc, rexp;

  int           cyc = 0;
  logic         h_valid [H];
  logic [N-1:0] h_res   [H];
  logic [N-1:0] q_exp [$];
  int           q_cyc [$];
  int           issued = 0;

  initial begin
    done = 0; checks = 0; failures = 0; n_mul_byp = 0;
    for (int i = 0; i < 8; i++) n_acc_byp[i] = 0;
    for (int i = 0; i < H; i++) h_valid[i] = 0;

  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    fpu_req_t r;
    int near, d;
    r = '0;
    // check the output of this cycle
    if (out_valid) begin
      checks++;
      if (q_exp.size() == 0) begin
        failures++;
        $display("unexpected result %h", out_res);
      end else begin
        logic [N-1:0] e;
        int ic;
        e = q_exp.pop_front();
        ic = q_cyc.pop_front();
        if (out_res[N-1:0] !== e || (cyc - ic) != STAGES) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH EW=%0d got %h exp %h latency %0d", EW, out_res[N-1:0], e, cyc - ic);
        end
      end
    end
    // issue the next operation
    if (rst_n && issued < NOPS && $urandom_range(0, 9) != 0) begin
      near = $urandom_range(1, (1 << EW) - 2);
      r.valid = 1;
      r.a = rnd_fp(EW, MW, near);
      r.b = rnd_fp(EW, MW, near / 2 + (1 << (EW - 2)));
      r.c = rnd_fp(EW, MW, near / 2 + (1 << (EW - 2)));
      ra = r.a[N-1:0]; rb = r.b[N-1:0]; rc = r.c[N-1:0];
      d = $urandom_range(ACC_MIN, STAGES - 1);
      if ($urandom_range(0, 3) == 0 && h_valid[(cyc - d) % H] && cyc >= d) begin
        r.a_byp = 1; r.a_dist = 3'(d); ra = h_res[(cyc - d) % H];
        n_acc_byp[d]++;
      end
      if (cyc >= STAGES - 1 && h_valid[(cyc - (STAGES - 1)) % H]) begin
        if ($urandom_range(0, 4) == 0) begin r.b_byp = 1; rb = h_res[(cyc - (STAGES - 1)) % H]; end
        if ($urandom_range(0, 4) == 0) begin r.c_byp = 1; rc = h_res[(cyc - (STAGES - 1)) % H]; end
        if (r.b_byp || r.c_byp) n_mul_byp++;
      end
      rexp = N'(fma_ref(EW, MW, 64'(ra), 64'(rb), 64'(rc)));
      q_exp.push_back(rexp);
      q_cyc.push_back(cyc);
      h_res[cyc % H] = rexp;
      h_valid[cyc % H] = 1;
      issued++;
    end else begin
      h_valid[cyc % H] = 0;
    end
    req = r;
    if (issued >= NOPS && q_exp.size() == 0) done = 1;
  end
endmodule
