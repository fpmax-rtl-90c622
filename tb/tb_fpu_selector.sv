// tb_fpu_selector: random requests and unit selections; checks that only
// the selected unit receives the request, the others see an all-zero
// request, and that the selected unit's result comes back.
module tb_fpu_selector;
  import fpmax_pkg::*;
  fpu_sel_e    sel;
  fpu_req_t    req;
  fpu_req_t    fpu_req   [NUM_FPU];
  logic        fpu_valid [NUM_FPU];
  logic [63:0] fpu_res   [NUM_FPU];
  logic        res_valid;
  logic [63:0] res;
  int checks = 0, failures = 0;

  fpu_selector u (.sel, .req, .fpu_req, .fpu_valid, .fpu_res, .res_valid, .res);

  initial begin
    for (int k = 0; k < 2000; k++) begin
      sel = fpu_sel_e'($urandom_range(0, 3));
      req = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < NUM_FPU; i++) begin
        fpu_valid[i] = 1'($urandom);
        fpu_res[i]   = {$urandom, $urandom};
      end
      #1;
      for (int i = 0; i < NUM_FPU; i++) begin
        checks++;
        if (fpu_req[i] !== ((i == int'(sel)) ? req : '0)) failures++;
      end
      checks += 2;
      if (res !== fpu_res[int'(sel)]) failures++;
      if (res_valid !== fpu_valid[int'(sel)]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
