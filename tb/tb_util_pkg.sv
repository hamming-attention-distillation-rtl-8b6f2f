// tb_util_pkg: helpers shared by the testbenches: bfloat16 <-> real
// conversion and random bfloat16 generation. Used only for reference models.
package tb_util_pkg;

  // exact value of a bfloat16 pattern (denormals included, inf/NaN not used)
  function automatic real bf16_to_real(input logic [15:0] b);
    real m;
    int  e;
    e = int'(b[14:7]);
    if (e == 0) m = real'(b[6:0]) / 128.0 * (2.0 ** (-126));
    else        m = (1.0 + real'(b[6:0]) / 128.0) * (2.0 ** (e - 127));
    return b[15] ? -m : m;
  endfunction

  // random bfloat16 with exponent in [emin, emax] (biased) and random sign
  function automatic logic [15:0] rand_bf16(input int emin, input int emax);
    logic [15:0] b;
    b[15]   = 1'($urandom);
    b[14:7] = 8'(emin + int'($urandom % 32'(emax - emin + 1)));
    b[6:0]  = 7'($urandom);
    return b;
  endfunction

endpackage
