// tb_lstm_cell_lane: drives random gate pre-activations, cell states, peephole weights and
// biases into one lane, one element per cycle, and compares c and m with the LSTM cell equations
// evaluated in double precision with the exact sigmoid and tanh (tolerance 0.03, which covers
// the piecewise-linear approximation and 16-bit rounding). Also checks the 9-cycle latency.
module tb_lstm_cell_lane;
  import clstm_pkg::*;
  localparam int NS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  fix_t a_i, a_f, a_c, a_o, c_prev, w_ic, w_fc, w_oc, b_i, b_f, b_c, b_o, c_out, m_out;

  lstm_cell_lane dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0, oi = 0;
  real ec [NS], em [NS];
  int  tin [NS];
  real maxe = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sg(input real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  function automatic real th(input real v); return (($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v))); endfunction
  function automatic fix_t rq(input real amp);
    return fix_t'($rtoi(amp * 4096.0 * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0)));
  endfunction
  function automatic real r(input fix_t v); return real'(v) / 4096.0; endfunction

  always @(negedge clk) begin
    if (out_valid) begin
      real e1, e2;
      if (oi < NS) begin
        e1 = r(c_out) - ec[oi]; if (e1 < 0) e1 = -e1;
        e2 = r(m_out) - em[oi]; if (e2 < 0) e2 = -e2;
        if (e1 > maxe) maxe = e1;
        if (e2 > maxe) maxe = e2;
        checks += 3;
        if (e1 > 0.03) begin failures++; $display("c[%0d] got %f exp %f", oi, r(c_out), ec[oi]); end
        if (e2 > 0.03) begin failures++; $display("m[%0d] got %f exp %f", oi, r(m_out), em[oi]); end
        if (cyc - tin[oi] != 9) begin failures++; $display("latency %0d", cyc - tin[oi]); end
      end
      oi++;
    end
  end

  initial begin
    in_valid = 0;
    {a_i, a_f, a_c, a_o, c_prev, w_ic, w_fc, w_oc, b_i, b_f, b_c, b_o} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      real zi, zf, zg, zo, ig, fg, gg, og, cn;
      #1;
      in_valid = (s % 17 != 5);
      a_i = rq(3.0); a_f = rq(3.0); a_c = rq(3.0); a_o = rq(3.0);
      c_prev = rq(2.0);
      w_ic = rq(0.8); w_fc = rq(0.8); w_oc = rq(0.8);
      b_i = rq(1.0); b_f = rq(1.0); b_c = rq(1.0); b_o = rq(1.0);
      zi = r(a_i) + r(w_ic) * r(c_prev) + r(b_i);
      zf = r(a_f) + r(w_fc) * r(c_prev) + r(b_f);
      zg = r(a_c) + r(b_c);
      zo = r(a_o) + r(w_oc) * r(c_prev) + r(b_o);
      ig = sg(zi); fg = sg(zf); gg = sg(zg); og = sg(zo);
      cn = fg * r(c_prev) + gg * ig;
      if (in_valid) begin
        int k;
        k = 0;
        for (int q = 0; q < s; q++) if (q % 17 != 5) k++;
        ec[k] = cn; em[k] = og * th(cn); tin[k] = cyc;
      end
      @(posedge clk);
    end
    #1 in_valid = 0;
    repeat (15) @(posedge clk);
    checks++;
    if (oi != NS - (NS + 11) / 17) begin failures++; $display("%0d outputs", oi); end
    $display("max error %f", maxe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
