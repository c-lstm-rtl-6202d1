// tb_fft_pipe: checks the pipelined FFT against a direct DFT computed in double precision.
// Two instances are driven with the same random blocks, one block per cycle: the default
// (SCALE = 1, result divided by N) and an unscaled one (SCALE = 0) fed with small inputs.
// Each output must be within 4 LSB of the reference and must appear exactly log2(N) cycles after
// its input.
module tb_fft_pipe;
  import clstm_pkg::*;
  localparam int N = 8;
  localparam int L = $clog2(N);
  localparam int NBLK = 40;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  fix_t in_re [N], in_im [N], s_in_re [N], s_in_im [N];
  logic ov1, ov0;
  fix_t o1_re [N], o1_im [N], o0_re [N], o0_im [N];

  fft_pipe dut_s (.clk, .rst_n, .in_valid, .in_re, .in_im,
                  .out_valid(ov1), .out_re(o1_re), .out_im(o1_im));
  fft_pipe #(.N(N), .SCALE(1'b0)) dut_u (.clk, .rst_n, .in_valid, .in_re(s_in_re), .in_im(s_in_im),
                  .out_valid(ov0), .out_re(o0_re), .out_im(o0_im));

  int checks = 0, failures = 0;
  fix_t blk_re [NBLK][N], blk_im [NBLK][N];
  int in_cyc [NBLK];
  int cyc = 0, out_idx = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(input int b);
    real rr, ri, e;
    for (int k = 0; k < N; k++) begin
      // scaled instance
      rr = 0; ri = 0;
      for (int n = 0; n < N; n++) begin
        rr += real'(blk_re[b][n]) * $cos(2*PI*k*n/N) + real'(blk_im[b][n]) * $sin(2*PI*k*n/N);
        ri += real'(blk_im[b][n]) * $cos(2*PI*k*n/N) - real'(blk_re[b][n]) * $sin(2*PI*k*n/N);
      end
      e = (rr / N - real'(o1_re[k])); if (e < 0) e = -e;
      checks++; if (e > 4.0) begin failures++; $display("scaled re blk %0d bin %0d: got %0d exp %f", b, k, o1_re[k], rr/N); end
      e = (ri / N - real'(o1_im[k])); if (e < 0) e = -e;
      checks++; if (e > 4.0) begin failures++; $display("scaled im blk %0d bin %0d: got %0d exp %f", b, k, o1_im[k], ri/N); end
      // unscaled instance saw the inputs divided by 8
      rr = 0; ri = 0;
      for (int n = 0; n < N; n++) begin
        rr += real'(blk_re[b][n] >>> 3) * $cos(2*PI*k*n/N) + real'(blk_im[b][n] >>> 3) * $sin(2*PI*k*n/N);
        ri += real'(blk_im[b][n] >>> 3) * $cos(2*PI*k*n/N) - real'(blk_re[b][n] >>> 3) * $sin(2*PI*k*n/N);
      end
      e = (rr - real'(o0_re[k])); if (e < 0) e = -e;
      checks++; if (e > 4.0) begin failures++; $display("unscaled re blk %0d bin %0d: got %0d exp %f", b, k, o0_re[k], rr); end
      e = (ri - real'(o0_im[k])); if (e < 0) e = -e;
      checks++; if (e > 4.0) begin failures++; $display("unscaled im blk %0d bin %0d: got %0d exp %f", b, k, o0_im[k], ri); end
    end
    checks++;
    if (cyc - in_cyc[b] != L) begin failures++; $display("latency %0d, expected %0d", cyc - in_cyc[b], L); end
  endtask

  always @(negedge clk) begin
    if (ov1) begin
      if (!ov0) begin failures++; $display("valid mismatch"); end
      if (out_idx < NBLK) check_out(out_idx);
      out_idx++;
    end
  end

  initial begin
    for (int b = 0; b < NBLK; b++)
      for (int n = 0; n < N; n++) begin
        blk_re[b][n] = fix_t'($urandom_range(0, 65535));
        blk_im[b][n] = (b % 2 == 0) ? fix_t'(0) : fix_t'($urandom_range(0, 65535));
        if (b == 0) begin blk_re[b][n] = FIX_MAX; blk_im[b][n] = '0; end   // full-scale DC
      end
    in_valid = 0;
    for (int n = 0; n < N; n++) begin in_re[n] = '0; in_im[n] = '0; s_in_re[n] = '0; s_in_im[n] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int b = 0; b < NBLK; b++) begin
      #1;
      in_valid = (b % 7 != 3) || 1'b1;
      for (int n = 0; n < N; n++) begin
        in_re[n] = blk_re[b][n]; in_im[n] = blk_im[b][n];
        s_in_re[n] = blk_re[b][n] >>> 3; s_in_im[n] = blk_im[b][n] >>> 3;
      end
      in_cyc[b] = cyc;
      @(posedge clk);
    end
    #1 in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (out_idx != NBLK) begin failures++; $display("got %0d outputs, expected %0d", out_idx, NBLK); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
