// tb_util_pkg: testbench helpers.  Conversion between real and the engine's
// fp32 format (truncating, flush-to-zero, like the RTL helpers), and a
// relative-tolerance comparison.
package tb_util_pkg;
  import md_pkg::*;

  function automatic fp32_t r2f(input real r);
    logic [63:0] b;
    int e;
    if (r == 0.0) return 32'h0;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + 127;
    if (e <= 0) return 32'h0;
    if (e >= 255) return {b[63], 31'h7f7f_ffff};
    return {b[63], 8'(e), b[51:29]};
  endfunction

  function automatic real f2r(input fp32_t f);
    logic [63:0] b;
    if (f[30:23] == 8'd0) return 0.0;
    b = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  function automatic real fx2r(input fix_t v);
    return real'(v) / 1048576.0;
  endfunction

  function automatic fix_t r2fx(input real r);
    return fix_t'($rtoi(r * 1048576.0));
  endfunction

  function automatic real rabs(input real r);
    return r < 0.0 ? -r : r;
  endfunction

  // |a-b| <= rel*max(|a|,|b|) + abs_tol
  function automatic bit near(input real a, input real b, input real rel, input real abs_tol);
    real m;
    m = rabs(a) > rabs(b) ? rabs(a) : rabs(b);
    return rabs(a - b) <= rel * m + abs_tol;
  endfunction

  function automatic real urand01();
    return real'($urandom) / 4294967296.0;
  endfunction

  // ---- RL force table: first-order interpolation of (r^2)^(-k/2), k = 14, 8, 3,
  // section s covers r^2 in [2^s, 2^(s+1)) A^2 with 256 intervals
  function automatic real rk(input int term, input real r2);
    real e;
    e = term == 0 ? 7.0 : term == 1 ? 4.0 : 1.5;
    return r2 ** (-e);
  endfunction

  function automatic real tab_a(input int addr);
    int s, b;
    s = addr / 256; b = addr % 256;
    return (2.0 ** s) * (1.0 + real'(b) / 256.0);
  endfunction

  function automatic real tab_h(input int addr);
    return (2.0 ** (addr / 256)) / 256.0;
  endfunction

  // coef 0: f(a); coef 1: slope over the interval
  function automatic real tab_c(input int term, input int coef, input int addr);
    real a, h;
    a = tab_a(addr); h = tab_h(addr);
    return coef == 0 ? rk(term, a) : (rk(term, a + h) - rk(term, a)) / h;
  endfunction

  // model of the interpolated r^-k as the pipeline evaluates it
  function automatic real interp(input int term, input real r2);
    int s, b, addr;
    real x, a;
    x = r2 < 1.0 ? 1.0 : r2;
    s = 0;
    while (x >= 2.0 ** (s + 1)) s++;
    b = int'($floor((x / (2.0 ** s) - 1.0) * 256.0));
    addr = s * 256 + b;
    a = tab_a(addr);
    return f2r(r2f(tab_c(term, 0, addr))) + f2r(r2f(tab_c(term, 1, addr))) * (x - a);
  endfunction
endpackage
