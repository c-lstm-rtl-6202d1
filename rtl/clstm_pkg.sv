// clstm_pkg: number formats, saturating fixed-point helpers, FFT twiddle factors and the
// piecewise-linear activation tables shared by every block of the C-LSTM accelerator.
//
// Data format. Every datapath word is a 16-bit two's-complement fixed-point number (the 16-bit
// quantisation is the paper's). The split into integer and fraction bits is not published; this
// design uses Q4.12 (sign, 3 integer bits, 12 fraction bits, range [-8, 8)), chosen so that the
// input ranges of the activation curves (sigmoid +-5, tanh +-4) are representable. Every
// multiplier rounds to nearest and every adder saturates instead of wrapping.
//
// Twiddle factors are Q2.14 numbers taken from a quarter-wave table of cos(2*pi*t/64),
// t = 0..16, so any power-of-two FFT size up to 64 points can be built from it.
//
// Activations. Sigmoid and tanh are approximated by 22 linear segments each: 20 equal segments
// inside the range where the curve bends (sigmoid: -5..5 in steps of 0.5, tanh: -4..4 in steps of
// 0.4) and one flat segment on each side, held at the asymptote. Segment s in 1..20 joins the
// curve's exact values at its two end points: slope a = (f(x1)-f(x0))/(x1-x0) and intercept
// b = f(x0) - a*x0, both rounded to Q4.12. Segment 0 and segment 21 have slope 0 and the
// asymptote as intercept. The segment count is the paper's; the breakpoints are read from the
// marked points of its activation plots.
package clstm_pkg;

  localparam int unsigned DATA_W  = 16;
  localparam int unsigned FRAC    = 12;
  localparam int unsigned TW_FRAC = 14;

  typedef logic signed [DATA_W-1:0] fix_t;

  typedef struct packed {
    fix_t re;
    fix_t im;
  } cplx_t;

  // Gate order used by every buffer that holds one value per gate.
  typedef enum logic [1:0] {GATE_I = 2'd0, GATE_F = 2'd1, GATE_C = 2'd2, GATE_O = 2'd3} gate_e;

  typedef enum logic {ACT_SIGMOID = 1'b0, ACT_TANH = 1'b1} act_e;

  localparam fix_t FIX_MAX = 16'sh7fff;
  localparam fix_t FIX_MIN = -16'sh8000;

  // Saturate a wide signed value to 16 bits.
  function automatic fix_t sat(input logic signed [47:0] v);
    if (v > 48'sd32767)       return FIX_MAX;
    else if (v < -48'sd32768) return FIX_MIN;
    else                      return fix_t'(v);
  endfunction

  function automatic fix_t sat_add(input fix_t a, input fix_t b);
    return sat(48'(a) + 48'(b));
  endfunction

  // Round-to-nearest arithmetic right shift of a wide value.
  function automatic logic signed [47:0] rshift_round(input logic signed [47:0] v,
                                                       input int unsigned sh);
    logic signed [47:0] half;
    if (sh == 0) return v;
    half = 48'sd1 <<< (sh - 1);
    return (v + half) >>> sh;
  endfunction

  // Q4.12 x Q4.12 -> Q4.12, rounded and saturated.
  function automatic fix_t fmul(input fix_t a, input fix_t b);
    logic signed [47:0] p;
    p = 48'(a) * 48'(b);
    return sat(rshift_round(p, FRAC));
  endfunction

  // cos(2*pi*t/64) for t = 0..16 in Q2.14.
  localparam logic signed [15:0] COS64 [17] = '{
    16'sd16384, 16'sd16305, 16'sd16069, 16'sd15679, 16'sd15137, 16'sd14449, 16'sd13623,
    16'sd12665, 16'sd11585, 16'sd10394, 16'sd9102,  16'sd7723,  16'sd6270,  16'sd4756,
    16'sd3196,  16'sd1606,  16'sd0
  };

  // cos(2*pi*t/64) for any t (taken modulo 64).
  function automatic logic signed [15:0] cos64(input int t);
    int u;
    u = t & 63;
    if (u <= 16)      return COS64[u];
    else if (u <= 32) return -COS64[32 - u];
    else if (u <= 48) return -COS64[u - 32];
    else              return COS64[64 - u];
  endfunction

  // sin(2*pi*t/64) = cos(2*pi*(t-16)/64).
  function automatic logic signed [15:0] sin64(input int t);
    return cos64(t - 16);
  endfunction

  // Breakpoints, slopes and intercepts of the two activation curves (Q4.12).
  localparam int unsigned PWL_SEGS = 22;
  localparam int unsigned PWL_BPS  = PWL_SEGS - 1;

  localparam fix_t SIG_BP [PWL_BPS] = '{
    -16'sd20480, -16'sd18432, -16'sd16384, -16'sd14336, -16'sd12288, -16'sd10240, -16'sd8192,
    -16'sd6144,  -16'sd4096,  -16'sd2048,  16'sd0,      16'sd2048,   16'sd4096,   16'sd6144,
    16'sd8192,   16'sd10240,  16'sd12288,  16'sd14336,  16'sd16384,  16'sd18432,  16'sd20480
  };
  localparam fix_t SIG_SLOPE [PWL_SEGS] = '{
    16'sd0,   16'sd35,  16'sd57,  16'sd93,  16'sd148, 16'sd233, 16'sd355, 16'sd518,
    16'sd709, 16'sd890, 16'sd1003, 16'sd1003, 16'sd890, 16'sd709, 16'sd518, 16'sd355,
    16'sd233, 16'sd148, 16'sd93,  16'sd57,  16'sd35,  16'sd0
  };
  localparam fix_t SIG_ICPT [PWL_SEGS] = '{
    16'sd0,    16'sd203,  16'sd303,  16'sd445,  16'sd639,  16'sd893,  16'sd1198, 16'sd1524,
    16'sd1810, 16'sd1991, 16'sd2048, 16'sd2048, 16'sd2105, 16'sd2286, 16'sd2572, 16'sd2898,
    16'sd3203, 16'sd3457, 16'sd3651, 16'sd3793, 16'sd3893, 16'sd4096
  };

  localparam fix_t TANH_BP [PWL_BPS] = '{
    -16'sd16384, -16'sd14746, -16'sd13107, -16'sd11469, -16'sd9830, -16'sd8192, -16'sd6554,
    -16'sd4915,  -16'sd3277,  -16'sd1638,  16'sd0,      16'sd1638,  16'sd3277,  16'sd4915,
    16'sd6554,   16'sd8192,   16'sd9830,   16'sd11469,  16'sd13107, 16'sd14746, 16'sd16384
  };
  localparam fix_t TANH_SLOPE [PWL_SEGS] = '{
    16'sd0,    16'sd8,    16'sd19,   16'sd41,   16'sd92,   16'sd201,  16'sd434,  16'sd901,
    16'sd1737, 16'sd2909, 16'sd3891, 16'sd3891, 16'sd2909, 16'sd1737, 16'sd901,  16'sd434,
    16'sd201,  16'sd92,   16'sd41,   16'sd19,   16'sd8,    16'sd0
  };
  localparam fix_t TANH_ICPT [PWL_SEGS] = '{
    -16'sd4096, -16'sd4060, -16'sd4023, -16'sd3950, -16'sd3809, -16'sd3546, -16'sd3081,
    -16'sd2333, -16'sd1330, -16'sd393,  16'sd0,     16'sd0,     16'sd393,   16'sd1330,
    16'sd2333,  16'sd3081,  16'sd3546,  16'sd3809,  16'sd3950,  16'sd4023,  16'sd4060,
    16'sd4096
  };

endpackage
