// lstm_cell_lane: the element-wise part of the LSTM cell for one element (one lane of stage 2).
//
// Given the four gate pre-activations a_* produced by the circulant convolutions of stage 1 and
// the previous cell state c_prev, it computes
//     i = sigma(a_i + w_ic*c_prev + b_i)     f = sigma(a_f + w_fc*c_prev + b_f)
//     g = sigma(a_c + b_c)                   o = sigma(a_o + w_oc*c_prev + b_o)
//     c = f*c_prev + g*i                     m = o * tanh(c)
// with the diagonal peephole weights w_*c applied as element-wise products.
//
// Pipeline (one element per clock, every step registered), LAT = 9:
//   1 peephole products   2 bias/peephole adders   3-4 sigmoids
//   5 products f*c_prev and g*i   6 adder -> c   7-8 tanh   9 product o*tanh(c)
// out_valid, c and m follow in_valid by LAT cycles; c is held back to leave together with m.
//
// Follows the paper's stage-2 datapath (peephole Elem Mul, Adders with bias, four Sigmoids, Elem
// Mul, Adder, Tanh, Elem Mul). Two points where the paper's equations and its architecture
// drawings differ are resolved in favour of the drawings: g uses a sigmoid, as both the
// equations and the drawing show (a tanh is common elsewhere), and the output-gate peephole
// uses c_prev as drawn, where the equations write c_t.
module lstm_cell_lane
  import clstm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t a_i, a_f, a_c, a_o,
  input  fix_t c_prev,
  input  fix_t w_ic, w_fc, w_oc,
  input  fix_t b_i, b_f, b_c, b_o,
  output logic out_valid,
  output fix_t c_out,
  output fix_t m_out
);
  localparam int unsigned LAT = 9;

  logic [3:0] v;   // valid through stages 1, 2, 5, 6 (activations carry their own)

  // stage 1: peephole products
  fix_t p_i1, p_f1, p_o1, a_i1, a_f1, a_c1, a_o1, b_i1, b_f1, b_c1, b_o1, c1;
  always_ff @(posedge clk) begin
    p_i1 <= fmul(w_ic, c_prev);
    p_f1 <= fmul(w_fc, c_prev);
    p_o1 <= fmul(w_oc, c_prev);
    {a_i1, a_f1, a_c1, a_o1} <= {a_i, a_f, a_c, a_o};
    {b_i1, b_f1, b_c1, b_o1} <= {b_i, b_f, b_c, b_o};
    c1 <= c_prev;
  end

  // stage 2: adders
  fix_t z_i2, z_f2, z_c2, z_o2, c2;
  always_ff @(posedge clk) begin
    z_i2 <= sat(48'(a_i1) + 48'(p_i1) + 48'(b_i1));
    z_f2 <= sat(48'(a_f1) + 48'(p_f1) + 48'(b_f1));
    z_c2 <= sat(48'(a_c1) + 48'(b_c1));
    z_o2 <= sat(48'(a_o1) + 48'(p_o1) + 48'(b_o1));
    c2   <= c1;
  end

  // stages 3-4: sigmoids
  fix_t s_i, s_f, s_g, s_o;
  logic sv_i, sv_f, sv_g, sv_o;
  pwl_act #(.FUNC(ACT_SIGMOID)) u_sig_i (.clk, .rst_n, .in_valid(v[1]), .x(z_i2), .out_valid(sv_i), .y(s_i));
  pwl_act #(.FUNC(ACT_SIGMOID)) u_sig_f (.clk, .rst_n, .in_valid(v[1]), .x(z_f2), .out_valid(sv_f), .y(s_f));
  pwl_act #(.FUNC(ACT_SIGMOID)) u_sig_g (.clk, .rst_n, .in_valid(v[1]), .x(z_c2), .out_valid(sv_g), .y(s_g));
  pwl_act #(.FUNC(ACT_SIGMOID)) u_sig_o (.clk, .rst_n, .in_valid(v[1]), .x(z_o2), .out_valid(sv_o), .y(s_o));

  fix_t c3, c4;
  always_ff @(posedge clk) begin
    c3 <= c2;
    c4 <= c3;
  end

  // stage 5: products
  fix_t ig5, fc5, o5;
  always_ff @(posedge clk) begin
    ig5 <= fmul(s_i, s_g);
    fc5 <= fmul(s_f, c4);
    o5  <= s_o;
  end

  // stage 6: new cell state
  fix_t c6, o6;
  always_ff @(posedge clk) begin
    c6 <= sat_add(fc5, ig5);
    o6 <= o5;
  end

  // stages 7-8: tanh
  fix_t h8;
  logic hv;
  pwl_act #(.FUNC(ACT_TANH)) u_tanh (.clk, .rst_n, .in_valid(v[3]), .x(c6), .out_valid(hv), .y(h8));

  fix_t o7, o8, c7, c8;
  always_ff @(posedge clk) begin
    o7 <= o6; o8 <= o7;
    c7 <= c6; c8 <= c7;
  end

  // stage 9: cell output
  always_ff @(posedge clk) begin
    m_out <= fmul(o8, h8);
    c_out <= c8;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v         <= '0;
      out_valid <= 1'b0;
    end else begin
      v[0]      <= in_valid;
      v[1]      <= v[0];
      v[2]      <= sv_i & sv_f & sv_g & sv_o;
      v[3]      <= v[2];
      out_valid <= hv;
    end
  end

endmodule
