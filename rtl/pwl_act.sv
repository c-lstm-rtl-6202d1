// pwl_act: piecewise-linear sigmoid or tanh with 22 segments (FUNC selects which).
//
// The input is compared with the 21 breakpoints of the curve; the number of breakpoints at or
// below it selects one of 22 (slope, intercept) pairs from the tables in clstm_pkg, and the
// result is slope * x + intercept in Q4.12: one comparison step, one 16-bit multiply and one
// add, as the paper describes. Outside the bent part of the curve (sigmoid beyond +-5, tanh
// beyond +-4) the output is the asymptote.
//
// Timing: two register stages. y and out_valid follow x and in_valid by two cycles, one new
// input every cycle.
//
// Follows the paper: 22 segments, slope/intercept storage, compare-multiply-add. Own choices:
// breakpoint positions (read off the paper's plots), end-point interpolation and flat tails.
module pwl_act
  import clstm_pkg::*;
#(
  parameter act_e FUNC = ACT_SIGMOID
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t x,
  output logic out_valid,
  output fix_t y
);
  logic [4:0] seg;
  fix_t bp [PWL_BPS];
  fix_t slope [PWL_SEGS];
  fix_t icpt  [PWL_SEGS];

  assign bp    = (FUNC == ACT_SIGMOID) ? SIG_BP    : TANH_BP;
  assign slope = (FUNC == ACT_SIGMOID) ? SIG_SLOPE : TANH_SLOPE;
  assign icpt  = (FUNC == ACT_SIGMOID) ? SIG_ICPT  : TANH_ICPT;

  // segment index = number of breakpoints <= x (breakpoints ascend)
  always_comb begin
    seg = '0;
    for (int b = 0; b < PWL_BPS; b++)
      if (x >= bp[b]) seg = 5'(b + 1);
  end

  fix_t a_q, b_q, x_q;
  logic v_q;

  always_ff @(posedge clk) begin
    a_q <= slope[seg];
    b_q <= icpt[seg];
    x_q <= x;
    y   <= sat_add(fmul(a_q, x_q), b_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end

endmodule
