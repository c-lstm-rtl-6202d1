// tb_stage2_cell: stage 2 at reduced size (K = 8, 24 cells in 3 blocks). Loads random peephole
// weights and biases, answers gate-buffer reads from a model, and runs two frames: the first
// starts a sequence (c_t-1 = 0), the second continues it and must use the c_t the stage stored
// in the first. Expected c_t and m_t come from the cell equations in double precision with the
// piecewise-linear curves (tolerance 0.01). The pass length must be CELL/K + 11 cycles.
module tb_stage2_cell;
  import clstm_pkg::*;
  import clstm_tb_pkg::*;
  localparam int K = 8, CELL = 24, P1 = 3;
  localparam int CYC = P1 + 11;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, seq_start, busy, done, g_rd, m_we, ld_we;
  logic [1:0] g_addr, m_addr, ld_addr;
  logic [2:0] ld_sel;
  logic [3:0][K-1:0][15:0] g_data;
  logic [K-1:0][15:0] m_data, ld_data;

  stage2_cell #(.K(K), .CELL(CELL)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, t0 = 0, n_out = 0, pass_i = 0;
  real a [2][4][CELL];
  real pb [7][CELL];
  real c_state [CELL];
  real m_exp [2][CELL];
  real maxe = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk)
    if (g_rd) for (int g = 0; g < 4; g++) for (int n = 0; n < K; n++) g_data[g][n] <= q12(a[pass_i][g][g_addr * K + n]);

  always @(negedge clk) begin
    if (m_we) begin
      real e;
      checks++;
      if (int'(m_addr) != n_out % P1) begin failures++; $display("m_addr %0d", m_addr); end
      for (int n = 0; n < K; n++) begin
        e = r12(fix_t'(m_data[n])) - m_exp[pass_i][m_addr * K + n]; if (e < 0) e = -e;
        if (e > maxe) maxe = e;
        checks++;
        if (e > 0.01) begin failures++; $display("pass %0d cell %0d: m %f vs %f", pass_i, m_addr * K + n, r12(fix_t'(m_data[n])), m_exp[pass_i][m_addr * K + n]); end
      end
      n_out++;
    end
  end

  initial begin
    start = 0; seq_start = 0; ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = '0;
    for (int v = 0; v < 7; v++) for (int e = 0; e < CELL; e++) pb[v][e] = r12(q12(hrand(v, e, 1, 2, v < 3 ? 0.8 : 1.0)));
    for (int p = 0; p < 2; p++) for (int g = 0; g < 4; g++) for (int e = 0; e < CELL; e++)
      a[p][g][e] = r12(q12(hrand(p, g, e, 5, 3.0)));
    for (int e = 0; e < CELL; e++) c_state[e] = 0;
    for (int p = 0; p < 2; p++)
      for (int e = 0; e < CELL; e++) begin
        real ig, fg, gg, og, cn;
        ig = pwl_ref(a[p][0][e] + pb[0][e] * c_state[e] + pb[3][e], 0);
        fg = pwl_ref(a[p][1][e] + pb[1][e] * c_state[e] + pb[4][e], 0);
        gg = pwl_ref(a[p][2][e] + pb[5][e], 0);
        og = pwl_ref(a[p][3][e] + pb[2][e] * c_state[e] + pb[6][e], 0);
        cn = fg * c_state[e] + gg * ig;
        m_exp[p][e] = og * pwl_ref(cn, 1);
        c_state[e] = cn;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = 0; v < 7; v++) for (int b = 0; b < P1; b++) begin
      #1; ld_we = 1; ld_sel = 3'(v); ld_addr = 2'(b);
      for (int n = 0; n < K; n++) ld_data[n] = q12(pb[v][b * K + n]);
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
