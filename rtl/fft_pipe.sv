// fft_pipe: fully parallel N-point radix-2 FFT, one complete block per clock.
//
// The butterfly network is the decimation-in-time form: the inputs are taken in bit-reversed
// order, and stage s (s = 0 .. log2(N)-1) combines pairs 2^s apart with the twiddle
// W_N^m = exp(-j*2*pi*m/N). A register rank follows every stage, so a block presented with
// in_valid leaves with out_valid exactly LAT = log2(N) cycles later, outputs in natural order,
// and a new block can enter every cycle.
//
// SCALE = 1 divides every butterfly output by two (round to nearest), so the block leaves the
// transform divided by N. The C-LSTM datapath uses this for the forward DFT of its input vectors:
// the 1/N of the inverse transform is spread over the forward stages, one bit per stage, where a
// small number cannot overflow the accumulator that follows. SCALE = 0 leaves the butterflies
// unscaled; the inverse transform uses that and relies on the saturating adders.
//
// Follows the paper: the butterfly network, the per-stage register ranks and the 1-bit shift per
// stage. Own choices: decimation in time, Q2.14 twiddles, rounding and saturation.
module fft_pipe
  import clstm_pkg::*;
#(
  parameter int unsigned N     = 8,
  parameter bit          SCALE = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t in_re  [N],
  input  fix_t in_im  [N],
  output logic out_valid,
  output fix_t out_re [N],
  output fix_t out_im [N]
);
  localparam int unsigned LAT = $clog2(N);

  initial begin
    assert (N >= 4 && N <= 64 && (1 << LAT) == N)
      else $error("fft_pipe: N must be a power of two from 4 to 64");
  end

  function automatic int unsigned bitrev(input int unsigned v);
    int unsigned r;
    r = 0;
    for (int b = 0; b < LAT; b++) if (v[b]) r |= 1 << (LAT - 1 - b);
    return r;
  endfunction

  // br_*: inputs in bit-reversed order; st_*[s]: register rank after butterfly stage s.
  fix_t br_re [N];
  fix_t br_im [N];
  fix_t st_re [LAT][N];
  fix_t st_im [LAT][N];
  logic [LAT-1:0] vld;

  always_comb begin
    for (int n = 0; n < N; n++) begin
      br_re[n] = in_re[bitrev(n)];
      br_im[n] = in_im[bitrev(n)];
    end
  end

  for (genvar s = 0; s < LAT; s++) begin : g_stage
    localparam int unsigned HALF = 1 << s;
    localparam int unsigned SPAN = 2 * HALF;

    fix_t a_re [N];
    fix_t a_im [N];
    fix_t nx_re [N];
    fix_t nx_im [N];

    if (s == 0) begin : g_first
      assign a_re = br_re;
      assign a_im = br_im;
    end else begin : g_next
      assign a_re = st_re[s-1];
      assign a_im = st_im[s-1];
    end

    always_comb begin
      for (int b = 0; b < N / 2; b++) begin
        int unsigned top, bot;
        int t64;
        logic signed [47:0] wc, ws, pr, pi, ur, ui, lr, li;
        top = (b / HALF) * SPAN + (b % HALF);
        bot = top + HALF;
        // W_N^m with m = (b mod HALF) * N / SPAN, expressed in 64ths of a turn.
        t64 = (b % HALF) * (64 / SPAN);
        wc  = 48'(cos64(t64));
        ws  = 48'(sin64(t64));
        // (br + j bi)(wc - j ws)
        pr = rshift_round(48'(a_re[bot]) * wc + 48'(a_im[bot]) * ws, TW_FRAC);
        pi = rshift_round(48'(a_im[bot]) * wc - 48'(a_re[bot]) * ws, TW_FRAC);
        ur = 48'(a_re[top]) + pr;
        ui = 48'(a_im[top]) + pi;
        lr = 48'(a_re[top]) - pr;
        li = 48'(a_im[top]) - pi;
        if (SCALE) begin
          ur = rshift_round(ur, 1);
          ui = rshift_round(ui, 1);
          lr = rshift_round(lr, 1);
          li = rshift_round(li, 1);
        end
        nx_re[top] = sat(ur);
        nx_im[top] = sat(ui);
        nx_re[bot] = sat(lr);
        nx_im[bot] = sat(li);
      end
    end

    always_ff @(posedge clk) begin
      st_re[s] <= nx_re;
      st_im[s] <= nx_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end

  assign out_valid = vld[LAT-1];
  assign out_re    = st_re[LAT-1];
  assign out_im    = st_im[LAT-1];

endmodule
