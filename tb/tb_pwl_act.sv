// tb_pwl_act: sweeps both activation units over the whole Q4.12 input range (every 7th code and
// the breakpoints themselves), compares with the exact sigmoid and tanh computed in double
// precision (error must stay under 1 % of the output range: 0.01 for sigmoid, 0.02 for tanh) and
// checks the two-cycle latency and the saturation at both ends.
module tb_pwl_act;
  import clstm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, vs, vt;
  fix_t x, ys, yt;
  pwl_act #(.FUNC(ACT_SIGMOID)) u_sig (.clk, .rst_n, .in_valid, .x, .out_valid(vs), .y(ys));
  pwl_act #(.FUNC(ACT_TANH))    u_tanh(.clk, .rst_n, .in_valid, .x, .out_valid(vt), .y(yt));

  int checks = 0, failures = 0;
  fix_t hist [$];
  real maxs = 0, maxt = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sigm(input real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  function automatic real th(input real v); return (($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v))); endfunction

  always @(negedge clk) begin
    if (vs !== vt) begin failures++; $display("valid mismatch"); end
    if (vs) begin
      fix_t xi;
      real xr, es, et;
      xi = hist.pop_front();
      xr = real'(xi) / 4096.0;
      es = real'(ys) / 4096.0 - sigm(xr); if (es < 0) es = -es;
      et = real'(yt) / 4096.0 - th(xr);   if (et < 0) et = -et;
      if (es > maxs) maxs = es;
      if (et > maxt) maxt = et;
      checks += 2;
      if (es > 0.01) begin failures++; $display("sigmoid(%f) = %f", xr, real'(ys)/4096.0); end
      if (et > 0.02) begin failures++; $display("tanh(%f) = %f", xr, real'(yt)/4096.0); end
    end
  end

  task automatic drive(input fix_t v);
    #1; in_valid = 1; x = v; hist.push_back(v);
    @(posedge clk);
  endtask

  initial begin
    int lat;
    in_valid = 0; x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // latency check on a single sample
    #1; in_valid = 1; x = 16'sd0; hist.push_back(x);
    @(posedge clk); #1 in_valid = 0; lat = 1;
    while (!vs) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("latency %0d, expected 2", lat); end
    checks++;
    if (ys != 16'sd2048 || yt != 16'sd0) begin failures++; $display("f(0): %0d %0d", ys, yt); end
    @(posedge clk);
    for (int v = -32768; v < 32768; v += 7) drive(fix_t'(v));
    for (int b = 0; b < PWL_BPS; b++) begin drive(SIG_BP[b]); drive(TANH_BP[b]); end
    drive(FIX_MIN); drive(FIX_MAX);
    #1 in_valid = 0;
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (ys != 16'sd4096 || yt != 16'sd4096) begin failures++; $display("saturation high: %0d %0d", ys, yt); end
    $display("max error sigmoid %f tanh %f", maxs, maxt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
