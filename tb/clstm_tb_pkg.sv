// clstm_tb_pkg: reference arithmetic shared by the test benches. Everything here is double
// precision and written from the equations, not from the RTL: Q4.12 conversion, a deterministic
// pseudo-random number per index tuple (so large weight sets need not be stored or read from
// files), the half spectrum of a real block in the accelerator's packed layout, the circular
// convolution that a circulant block performs, and the activation curves.
package clstm_tb_pkg;
  import clstm_pkg::*;

  localparam real PI  = 3.14159265358979323846;
  localparam real ONE = 4096.0;

  function automatic fix_t q12(input real v);
    real s;
    s = v * ONE;
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return fix_t'($rtoi(s + (s >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real r12(input fix_t v);
    return real'(v) / ONE;
  endfunction

  // uniform in [-amp, amp], a fixed function of (a, b, c, d)
  function automatic real hrand(input int a, input int b, input int c, input int d, input real amp);
    logic [31:0] h;
    h = 32'(a) * 32'd73856093 ^ 32'(b) * 32'd19349663 ^ 32'(c) * 32'd83492791 ^ 32'(d) * 32'd2654435761;
    h = h ^ (h >> 15);
    h = h * 32'h2c1b3c6d;
    h = h ^ (h >> 12);
    h = h * 32'h297a2d39;
    h = h ^ (h >> 15);
    return amp * (real'(h % 32'd20001) / 10000.0 - 1.0);
  endfunction

  // packed half spectrum of a real block of K = w.size() values
  function automatic void half_spec(input real w [], output fix_t s []);
    int k;
    real re, im;
    k = w.size();
    s = new[k];
    for (int m = 0; m <= k / 2; m++) begin
      re = 0; im = 0;
      for (int n = 0; n < k; n++) begin
        re += w[n] * $cos(2.0 * PI * m * n / k);
        im -= w[n] * $sin(2.0 * PI * m * n / k);
      end
      if (m == 0)          s[0] = q12(re);
      else if (m == k / 2) s[1] = q12(re);
      else begin
        s[2*m]   = q12(re);
        s[2*m+1] = q12(im);
      end
    end
  endfunction

  function automatic real sigm(input real v);
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  function automatic real tanh_r(input real v);
    return ($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v));
  endfunction

  // piecewise-linear interpolation of sigmoid (t = 0) or tanh (t = 1) through 21 equally spaced
  // points, flat at the asymptotes outside: the approximation the accelerator is specified to use
  function automatic real pwl_ref(input real v, input bit t);
    real x0, st, xa, ya, yb;
    int s;
    x0 = t ? -4.0 : -5.0;
    st = t ? 0.4 : 0.5;
    if (v < x0) return t ? -1.0 : 0.0;
    if (v >= -x0) return 1.0;
    s  = $rtoi((v - x0) / st);
    if (s > 19) s = 19;
    xa = x0 + s * st;
    ya = t ? tanh_r(xa) : sigm(xa);
    yb = t ? tanh_r(xa + st) : sigm(xa + st);
    return ya + (yb - ya) * (v - xa) / st;
  endfunction
endpackage
