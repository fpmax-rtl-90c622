// fp_stim_pkg: random operand generator for the floating-point testbenches.
// Mixes random bit patterns, values near one another (to provoke massive
// cancellation), subnormals, zeros, infinities, NaNs and large exponents.
package fp_stim_pkg;
  function automatic logic [63:0] rnd64();
    return {$urandom(), $urandom()};
  endfunction

  // Random operand of a format with EW exponent and MW fraction bits.
  // 'near' is an exponent field to stay close to (for cancellation tests).
  function automatic logic [63:0] rnd_fp(int EW, int MW, int near);
    logic [63:0] f, w;
    int e, kind;
    int emax;
    emax = (1 << EW) - 1;
    f = rnd64() & ((64'd1 << MW) - 1);
    kind = $urandom_range(0, 99);
    if (kind < 40)      e = near + $urandom_range(0, 6) - 3;
    else if (kind < 70) e = $urandom_range(1, emax - 1);
    else if (kind < 80) e = 0;                                   // subnormal / zero
    else if (kind < 84) begin e = 0; f = 0; end                  // zero
    else if (kind < 87) begin e = emax; f = 0; end               // infinity
    else if (kind < 89) e = emax;                                // NaN (f != 0 mostly)
    else if (kind < 94) e = $urandom_range(emax - 3, emax - 1);  // near overflow
    else                e = $urandom_range(1, 3);                // near underflow
    if (e < 0) e = 0;
    if (e > emax) e = emax;
    if (kind < 40 && $urandom_range(0, 1) == 1) f = f | ((64'd1 << MW) - 64'd1 - (rnd64() & 64'hF));
    w = (64'($urandom_range(0, 1)) << (EW + MW)) | (64'(e) << MW) | f;
    return w;
  endfunction
endpackage
