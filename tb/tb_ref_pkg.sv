// tb_ref_pkg: reference arithmetic for the testbenches, written with real
// numbers and independent of the RTL's fixed-point code.
//
//  fp8_real     value of a shifted-FP8 code: (-1)^S * (1+M/8) * 2^(E-15),
//               zero for E=0, M=0
//  prod_fx      exact product scaled by 2^24, magnitude truncated
//  q_fp8        real -> FP8: magnitude truncated to 3 mantissa bits,
//               saturated at 1.875, zero below 2^-15 (and 2^-15 itself)
//  tanh_pwl     the accelerator's piecewise-linear tanh
//  code_dist    distance of two codes on the ordered code line
package tb_ref_pkg;
  localparam real TWO24 = 16777216.0;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp8_real(logic [7:0] x);
    real v;
    if (x[6:0] == 0) return 0.0;
    v = (1.0 + real'(x[2:0]) / 8.0) * pow2(int'(x[6:3]) - 15);
    return x[7] ? -v : v;
  endfunction

  function automatic longint prod_fx(logic [7:0] a, logic [7:0] b);
    real p;
    longint m;
    p = fp8_real(a) * fp8_real(b);
    m = longint'($floor((p < 0 ? -p : p) * TWO24));
    return p < 0 ? -m : m;
  endfunction

  function automatic logic [7:0] q_fp8(real y);
    real m;
    int e;
    logic s;
    logic [2:0] man;
    s = (y < 0);
    m = s ? -y : y;
    if (m >= 2.0) return {s, 4'd15, 3'd7};
    if (m < pow2(-15)) return 8'h00;
    e = 0;
    while (m >= pow2(e - 15 + 1)) e++;
    man = 3'($floor((m / pow2(e - 15) - 1.0) * 8.0));
    if (e == 0 && man == 0) return 8'h00;
    return {s, 4'(e), man};
  endfunction

  function automatic real tanh_pwl(real y);
    real m, r;
    m = y < 0 ? -y : y;
    if (m < 0.5) r = m;
    else if (m < 1.0) r = m / 2.0 + 0.25;
    else if (m < 2.0) r = m / 4.0 + 0.5;
    else r = 1.0;
    return y < 0 ? -r : r;
  endfunction

  function automatic int code_ord(logic [7:0] c);
    return c[7] ? -int'(c[6:0]) : int'(c[6:0]);
  endfunction

  function automatic int code_dist(logic [7:0] a, logic [7:0] b);
    int d = code_ord(a) - code_ord(b);
    return d < 0 ? -d : d;
  endfunction

  // Random nonzero FP8 with exponent in [emin, emax].
  function automatic logic [7:0] rand_fp8(int emin, int emax);
    logic [7:0] c;
    c[7]   = 1'($urandom_range(0, 1));
    c[6:3] = 4'($urandom_range(emin, emax));
    c[2:0] = 3'($urandom_range(0, 7));
    if (c[6:0] == 0) c[2:0] = 3'd1;
    return c;
  endfunction
endpackage
