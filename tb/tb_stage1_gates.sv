// tb_stage1_gates: stage 1 at reduced size (K = 8, 20 input features in 3 blocks, 16 cells,
// 16 projected outputs). The input-feature buffer model holds non-zero junk past feature 20,
// which the stage must ignore, and the recurrent buffer model holds y_t-1. Pass 1 starts a
// sequence (y_t-1 must be taken as zero), pass 2 continues it. Each written gate block is
// compared with W_*(xr) [x_t, y_t-1] computed from the time-domain weights in double precision,
// and the pass length must be P1*Q1 + 2*log2(K) + 4 cycles.
module tb_stage1_gates;
  import clstm_pkg::*;
  import clstm_tb_pkg::*;
  localparam int K = 8, XD = 20, CELL = 16, PROJ = 16;
  localparam int QX = 3, QY = 2, Q1 = 5, P1 = 2;
  localparam int CYC = P1 * Q1 + 2 * $clog2(K) + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, seq_start, busy, done, x_rd, y_rd, g_we, ld_we;
  logic [1:0] x_addr, ld_sel;
  logic       y_addr, g_addr;
  logic [3:0] ld_addr;
  logic [K-1:0][15:0] x_data, y_data, ld_data;
  logic [3:0][K-1:0][15:0] g_data;

  stage1_gates #(.K(K), .X_DIM(XD), .CELL(CELL), .PROJ(PROJ)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, t0 = 0, n_out = 0, pass_i = 0;
  real w [4][P1][Q1][K];
  real xv [2][QX*K], yv [2][QY*K];
  real maxe = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (x_rd) for (int n = 0; n < K; n++) x_data[n] <= q12(xv[pass_i][x_addr * K + n]);
    if (y_rd) for (int n = 0; n < K; n++) y_data[n] <= q12(yv[pass_i][y_addr * K + n]);
  end

  always @(negedge clk) begin
    if (g_we) begin
      real vin [Q1*K];
      real refv, e;
      for (int e2 = 0; e2 < QX * K; e2++) vin[e2] = (e2 < XD) ? xv[pass_i][e2] : 0.0;
      for (int e2 = 0; e2 < QY * K; e2++) vin[QX*K + e2] = (pass_i == 0) ? 0.0 : yv[pass_i][e2];
      checks++;
      if (int'(g_addr) != n_out % P1) begin failures++; $display("g_addr %0d", g_addr); end
      for (int g = 0; g < 4; g++)
        for (int n = 0; n < K; n++) begin
          refv = 0;
          for (int j = 0; j < Q1; j++)
            for (int m = 0; m < K; m++) refv += w[g][g_addr][j][(n - m + K) % K] * vin[j*K + m];
          e = r12(fix_t'(g_data[g][n])) - refv; if (e < 0) e = -e;
          if (e > maxe) maxe = e;
          checks++;
          if (e > 0.01) begin failures++; $display("pass %0d gate %0d blk %0d n %0d: %f vs %f", pass_i, g, g_addr, n, r12(fix_t'(g_data[g][n])), refv); end
        end
      n_out++;
    end
  end

  initial begin
    fix_t s [];
    real wb [];
    start = 0; seq_start = 0; ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = '0;
    for (int g = 0; g < 4; g++) for (int i = 0; i < P1; i++) for (int j = 0; j < Q1; j++)
      for (int n = 0; n < K; n++) w[g][i][j][n] = hrand(g, i, j, n, 0.2);
    for (int p = 0; p < 2; p++) begin
      for (int e2 = 0; e2 < QX * K; e2++) xv[p][e2] = r12(q12((e2 < XD) ? hrand(p, e2, 3, 3, 1.0) : 3.0));
      for (int e2 = 0; e2 < QY * K; e2++) yv[p][e2] = r12(q12(hrand(p, e2, 4, 4, 1.0)));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    wb = new[K];
    for (int g = 0; g < 4; g++) for (int i = 0; i < P1; i++) for (int j = 0; j < Q1; j++) begin
      for (int n = 0; n < K; n++) wb[n] = w[g][i][j][n];
      half_spec(wb, s);
      #1; ld_we = 1; ld_sel = 2'(g); ld_addr = 4'(i * Q1 + j);
      for (int n = 0; n < K; n++) ld_data[n] = s[n];
      @(posedge clk);
    end
    #1 ld_we = 0;
    for (int p = 0; p < 2; p++) begin
      @(posedge clk);
      #1 start = 1; seq_start = (p == 0); pass_i = p; t0 = cyc;
      @(posedge clk);
      #1 start = 0; seq_start = 0;
      while (!done) begin @(posedge clk); #1; end
      checks++;
      if (cyc - t0 != CYC) begin failures++; $display("pass took %0d cycles, expected %0d", cyc - t0, CYC); end
    end
    checks++;
    if (n_out != 2 * P1) begin failures++; $display("%0d blocks written", n_out); end
    $display("max error %f", maxe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
