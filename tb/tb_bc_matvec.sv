// tb_bc_matvec: loads the weight spectra of two random 24x40 block-circulant matrices (K = 8,
// P = 3 row blocks, Q = 5 column blocks) through the load port, answers the engine's input reads
// from a model buffer, and compares every written row block with the product computed from the
// time-domain defining vectors in double precision. Also checks the write addresses and that
// done comes P*Q + 2*log2(K) + 4 cycles after start; two passes run back to back.
module tb_bc_matvec;
  import clstm_pkg::*;
  import clstm_tb_pkg::*;
  localparam int K = 8, G = 2, P = 3, Q = 5;
  localparam int CYC = P * Q + 2 * $clog2(K) + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, in_rd, out_we, ld_we, ld_sel;
  logic [2:0] in_addr;
  logic [1:0] out_addr;
  logic [3:0] ld_addr;
  logic [K-1:0][15:0] in_data, ld_data;
  logic [G-1:0][K-1:0][15:0] out_data;

  bc_matvec #(.K(K), .G(G), .P(P), .Q(Q)) dut (.*);

  int checks = 0, failures = 0;
  real w [G][P][Q][K];
  real v [2][Q][K];
  int pass_i = 0, n_out = 0, cyc = 0, t_start = 0;
  real maxe = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // input buffer model, one cycle read latency
  always @(posedge clk) if (in_rd) for (int n = 0; n < K; n++) in_data[n] <= q12(v[pass_i][in_addr][n]);

  always @(negedge clk) begin
    if (out_we) begin
      real e, refv;
      checks++;
      if (int'(out_addr) != n_out % P) begin failures++; $display("out_addr %0d expected %0d", out_addr, n_out % P); end
      for (int g = 0; g < G; g++)
        for (int n = 0; n < K; n++) begin
          refv = 0;
          for (int j = 0; j < Q; j++)
            for (int m = 0; m < K; m++) refv += w[g][out_addr][j][(n - m + K) % K] * v[pass_i][j][m];
          e = r12(fix_t'(out_data[g][n])) - refv; if (e < 0) e = -e;
          if (e > maxe) maxe = e;
          checks++;
          if (e > 0.01) begin failures++; $display("g %0d row %0d n %0d: %f vs %f", g, out_addr, n, r12(fix_t'(out_data[g][n])), refv); end
        end
      n_out++;
    end
  end

  initial begin
    fix_t s [];
    real wb [];
    start = 0; ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = '0;
    for (int g = 0; g < G; g++) for (int i = 0; i < P; i++) for (int j = 0; j < Q; j++)
      for (int n = 0; n < K; n++) w[g][i][j][n] = hrand(g, i, j, n, 0.2);
    for (int p = 0; p < 2; p++) for (int j = 0; j < Q; j++) for (int n = 0; n < K; n++)
      v[p][j][n] = r12(q12(hrand(7 + p, j, n, 1, 1.5)));
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    wb = new[K];
    for (int g = 0; g < G; g++) for (int i = 0; i < P; i++) for (int j = 0; j < Q; j++) begin
      for (int n = 0; n < K; n++) wb[n] = w[g][i][j][n];
      half_spec(wb, s);
      #1; ld_we = 1; ld_sel = 1'(g); ld_addr = 4'(i * Q + j);
      for (int n = 0; n < K; n++) ld_data[n] = s[n];
      @(posedge clk);
    end
    #1 ld_we = 0;
    for (int p = 0; p < 2; p++) begin
      @(posedge clk);
      #1 start = 1; pass_i = p; t_start = cyc;
      @(posedge clk);
      #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      checks++;
      if (cyc - t_start != CYC) begin failures++; $display("pass took %0d cycles, expected %0d", cyc - t_start, CYC); end
      checks++;
      if (busy) begin failures++; $display("busy after done"); end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != 2 * P) begin failures++; $display("%0d row blocks written", n_out); end
    $display("max error %f", maxe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
