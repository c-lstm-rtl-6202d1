// tb_circ_conv: checks the circulant convolution operator against a time-domain reference.
// Random defining vectors w_ij and input blocks x_j are drawn; the test bench computes the
// weight half spectra F(w_ij) itself in double precision (this is the off-line step of the
// accelerator), rounds them to Q4.12 and streams groups of Q blocks, back to back. The expected
// row block is the direct circular convolution a[n] = sum_j sum_m w_ij[(n-m) mod K] x_j[m], in
// double precision. Results must lie within a tolerance of the reference, and each result must
// appear 2*log2(K)+2 cycles after the last block of its group.
module tb_circ_conv;
  import clstm_pkg::*;
  localparam int K = 8;
  localparam int LAT = 2 * $clog2(K) + 2;
  localparam int NG = 6;           // groups (row blocks)
  localparam int QMAX = 12;
  localparam real PI = 3.14159265358979323846;
  localparam real ONE = 4096.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, out_valid;
  fix_t x_blk [K], w_spec [K], a_blk [K];

  circ_conv dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .x_blk, .w_spec, .out_valid, .a_blk);

  int checks = 0, failures = 0;
  int qn [NG] = '{1, 12, 3, 7, 1, 12};
  real wt [NG][QMAX][K];
  real xt [NG][QMAX][K];
  real ref_a [NG][K];
  int last_cyc [NG];
  int cyc = 0, og = 0;
  real maxerr = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(input real amp);
    return amp * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
  endfunction

  function automatic fix_t q12(input real v);
    return fix_t'($rtoi(v * ONE + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  // half spectrum of w in the packed layout
  task automatic pack_spec(input int g, input int j, output fix_t s [K]);
    real re, im;
    for (int m = 0; m <= K/2; m++) begin
      re = 0; im = 0;
      for (int n = 0; n < K; n++) begin
        re += wt[g][j][n] * $cos(2*PI*m*n/K);
        im -= wt[g][j][n] * $sin(2*PI*m*n/K);
      end
      if (m == 0) s[0] = q12(re);
      else if (m == K/2) s[1] = q12(re);
      else begin s[2*m] = q12(re); s[2*m+1] = q12(im); end
    end
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      real e;
      if (og < NG) begin
        for (int n = 0; n < K; n++) begin
          e = real'(a_blk[n]) / ONE - ref_a[og][n];
          if (e < 0) e = -e;
          if (e > maxerr) maxerr = e;
          checks++;
          if (e > 0.01) begin failures++; $display("group %0d n %0d: got %f exp %f", og, n, real'(a_blk[n])/ONE, ref_a[og][n]); end
        end
        checks++;
        if (cyc - last_cyc[og] != LAT) begin failures++; $display("latency %0d expected %0d", cyc - last_cyc[og], LAT); end
      end
      og++;
    end
  end

  initial begin
    fix_t s [K];
    for (int g = 0; g < NG; g++) begin
      for (int n = 0; n < K; n++) ref_a[g][n] = 0;
      for (int j = 0; j < qn[g]; j++)
        for (int n = 0; n < K; n++) begin
          wt[g][j][n] = rnd(0.12);
          xt[g][j][n] = real'(q12(rnd(1.5))) / ONE;
        end
      for (int j = 0; j < qn[g]; j++)
        for (int n = 0; n < K; n++)
          for (int m = 0; m < K; m++)
            ref_a[g][n] += wt[g][j][(n - m + K) % K] * xt[g][j][m];
    end
    in_valid = 0; in_first = 0; in_last = 0;
    for (int n = 0; n < K; n++) begin x_blk[n] = '0; w_spec[n] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int g = 0; g < NG; g++) begin
      for (int j = 0; j < qn[g]; j++) begin
        pack_spec(g, j, s);
        #1;
        in_valid = 1; in_first = (j == 0); in_last = (j == qn[g] - 1);
        for (int n = 0; n < K; n++) begin x_blk[n] = q12(xt[g][j][n]); w_spec[n] = s[n]; end
        if (j == qn[g] - 1) last_cyc[g] = cyc;
        @(posedge clk);
      end
      // one idle cycle after group 2 to exercise gaps
      if (g == 2) begin #1 in_valid = 0; @(posedge clk); end
    end
    #1 in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (og != NG) begin failures++; $display("%0d results, expected %0d", og, NG); end
    $display("max abs error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
