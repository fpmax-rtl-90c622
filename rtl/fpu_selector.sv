// fpu_selector: routes the issued operation to the selected FPU and brings
// back that FPU's result stream.
//
// sel chooses one of the four units (SP FMA, SP CMA, DP FMA, DP CMA). The
// request goes only to the chosen unit; the others see an all-zero request
// so their datapaths do not toggle (operand isolation is this design's
// choice). Results of the chosen unit are passed back unchanged; a
// single-precision result sits in bits [31:0]. Combinational; sel must stay
// constant while a test runs.
module fpu_selector
  import fpmax_pkg::*;
(
  input  fpu_sel_e    sel,
  input  fpu_req_t    req,
  output fpu_req_t    fpu_req   [NUM_FPU],
  input  logic        fpu_valid [NUM_FPU],
  input  logic [63:0] fpu_res   [NUM_FPU],
  output logic        res_valid,
  output logic [63:0] res
);
  always_comb begin
    for (int i = 0; i < NUM_FPU; i++) fpu_req[i] = (int'(sel) == i) ? req : '0;
    res_valid = fpu_valid[sel];
    res       = fpu_res[sel];
  end
endmodule
