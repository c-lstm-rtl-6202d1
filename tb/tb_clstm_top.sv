// tb_clstm_top: end-to-end test of the accelerator at reduced size (K = 8, 20 input features,
// 32 cells, 16 projected outputs), with every model value loaded through the host interface.
//
// Eight frames are fed in this order of sequence-start flags: 1 0 0 1 1 1 0 1. The continuing
// frames 1, 2 and 6 must wait for their predecessors to leave the pipeline (recurrence stalls,
// pipeline drain steps); the independent frames 3, 4, 5 fill all three stages at once. Unused
// input features past the layer width are written with junk that the accelerator must ignore.
//
// Reference: the Google LSTM layer with peepholes and projection, in double precision, with the
// block-circulant matrices built from the same time-domain defining vectors whose spectra were
// loaded, the same piecewise-linear curves, the output-gate peephole on c_t-1 and a sigmoid for
// the candidate g. The state is reset at every sequence start. Each y_t value must match within
// 0.05.
//
// Counted mechanisms (each must occur at least once, otherwise it counts as a failure):
// recurrence stalls, full-overlap steps (all three stages active), drain steps (stage 1 idle
// while later stages work), sequence starts, continuing frames, cycles the host waited for the
// input buffer. Every step must last exactly as long as its slowest active stage:
// T1 = P1*Q1 + 2*log2(K) + 4, T2 = P1 + 11, T3 = QY*P1 + 2*log2(K) + 4 (P1 = CELL/K,
// Q1 = QX + QY input blocks, QY = PROJ/K).
module tb_clstm_top;
  import clstm_pkg::*;
  import clstm_tb_pkg::*;
  localparam int K = 8, XD = 20, CELL = 32, PROJ = 16;
  localparam int QX = (XD + K - 1) / K, QY = PROJ / K, P1 = CELL / K, Q1 = QX + QY;
  localparam int QXW = (QX > 1) ? $clog2(QX) : 1, QYW = (QY > 1) ? $clog2(QY) : 1;
  localparam int W1AW = $clog2(P1 * Q1), W3AW = $clog2(QY * P1);
  localparam int LAW = (W1AW > W3AW) ? W1AW : W3AW;
  localparam int L = $clog2(K);
  localparam int T1 = P1 * Q1 + 2 * L + 4, T2 = P1 + 11, T3 = QY * P1 + 2 * L + 4;
  localparam int NF = 8;
  localparam bit SEQ [NF] = '{1, 0, 0, 1, 1, 1, 0, 1};
  localparam int LOAD_LINES = 4 * P1 * Q1 + QY * P1 + 7 * P1;
  localparam int WD_CYC = LOAD_LINES + 3 * NF * (T1 + T3 + 40) + 1000;
  localparam real AMP1 = 2.5 / $sqrt(real'(Q1 * K));
  localparam real AMP3 = 3.0 / $sqrt(real'(P1 * K));
  localparam real TOL = 0.05;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we = 0, x_commit = 0, x_seq_start = 0, x_ready;
  logic [QXW-1:0] x_addr = '0;
  logic [K-1:0][15:0] x_data = '0;
  logic ld_we = 0;
  logic [3:0] ld_target = '0;
  logic [LAW-1:0] ld_addr = '0;
  logic [K-1:0][15:0] ld_data = '0;
  logic y_valid, frame_done, step_start, recur_stall;
  logic [QYW-1:0] y_addr;
  logic [K-1:0][15:0] y_data;
  logic [2:0] stage_active;

  clstm_top #(.K(K), .X_DIM(XD), .CELL(CELL), .PROJ(PROJ)) dut (.*);

  // ---------------- model and reference ----------------
  real w1 [4][P1][Q1][K];     // gate matrices, defining vectors of block (i, j)
  real w3 [QY][P1][K];        // projection matrix
  real pb [7][CELL];          // peepholes ic, fc, oc, biases i, f, c, o
  real xin [NF][QX*K];        // frames as written (junk past XD)
  real yref [NF][PROJ];

  task automatic build_reference();
    real c [CELL];
    real y [PROJ];
    real v [Q1*K];
    real m [CELL];
    for (int f = 0; f < NF; f++) begin
      if (SEQ[f]) begin
        foreach (c[e]) c[e] = 0;
        foreach (y[e]) y[e] = 0;
      end
      for (int e = 0; e < QX * K; e++) v[e] = (e < XD) ? xin[f][e] : 0.0;
      for (int e = 0; e < PROJ; e++) v[QX*K + e] = y[e];
      for (int i = 0; i < P1; i++)
        for (int n = 0; n < K; n++) begin
          real a [4];
          real ig, fg, gg, og, cp;
          int e;
          e = i * K + n;
          for (int g = 0; g < 4; g++) begin
            a[g] = 0;
            for (int j = 0; j < Q1; j++)
              for (int mm = 0; mm < K; mm++) a[g] += w1[g][i][j][(n - mm + K) % K] * v[j*K + mm];
          end
          cp = c[e];
          ig = pwl_ref(a[0] + pb[0][e] * cp + pb[3][e], 0);
          fg = pwl_ref(a[1] + pb[1][e] * cp + pb[4][e], 0);
          gg = pwl_ref(a[2] + pb[5][e], 0);
          og = pwl_ref(a[3] + pb[2][e] * cp + pb[6][e], 0);
          c[e] = fg * cp + gg * ig;
          m[e] = og * pwl_ref(c[e], 1);
        end
      for (int i = 0; i < QY; i++)
        for (int n = 0; n < K; n++) begin
          real s;
          s = 0;
          for (int j = 0; j < P1; j++)
            for (int mm = 0; mm < K; mm++) s += w3[i][j][(n - mm + K) % K] * m[j*K + mm];
          y[i*K + n] = s;
          yref[f][i*K + n] = s;
        end
    end
  endtask

  // ---------------- counters ----------------
  int checks = 0, failures = 0, cyc = 0;
  int n_stall = 0, n_full = 0, n_drain = 0, n_seq = 0, n_cont = 0, n_wait = 0, n_steps = 0;
  int f_out = 0, beats = 0;
  real maxe = 0;
  logic [2:0] cur_act = '0;
  int cur_len = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc > WD_CYC) begin
      failures++;
      $display("watchdog at cycle %0d, %0d frames out", cyc, f_out);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic int step_len(input logic [2:0] a);
    int t;
    t = 0;
    if (a[0] && T1 > t) t = T1;
    if (a[1] && T2 > t) t = T2;
    if (a[2] && T3 > t) t = T3;
    return t;
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (recur_stall) n_stall++;
    // steps are separated by at least one cycle with stage_active = 0
    if (stage_active != 3'b000) begin
      if (cur_len == 0) cur_act = stage_active;
      else if (stage_active != cur_act) begin failures++; $display("stage_active changed inside a step"); end
      cur_len++;
    end else if (cur_len != 0) begin
      n_steps++;
      checks++;
      if (cur_len != step_len(cur_act)) begin
        failures++;
        $display("step %b lasted %0d cycles, expected %0d", cur_act, cur_len, step_len(cur_act));
      end
      if (cur_act == 3'b111) n_full++;
      if (!cur_act[0]) n_drain++;
      cur_len = 0;
    end
    if (y_valid) begin
      checks++;
      if (int'(y_addr) != beats) begin failures++; $display("frame %0d: y block %0d, expected %0d", f_out, y_addr, beats); end
      for (int n = 0; n < K; n++) begin
        real e, r;
        r = (f_out < NF) ? yref[f_out][int'(y_addr) * K + n] : 0.0;
        e = r12(fix_t'(y_data[n])) - r;
        if (e < 0) e = -e;
        if (e > maxe) maxe = e;
        checks++;
        if (e > TOL) begin
          failures++;
          $display("frame %0d y[%0d] = %f, expected %f", f_out, int'(y_addr) * K + n, r12(fix_t'(y_data[n])), r);
        end
      end
      beats++;
    end
    if (frame_done) begin
      checks++;
      if (beats != QY) begin failures++; $display("frame %0d had %0d output blocks", f_out, beats); end
      beats = 0;
      f_out++;
    end
  end

  // ---------------- stimulus ----------------
  task automatic load_line(input int tgt, input int addr, input fix_t d []);
    ld_we = 1; ld_target = 4'(tgt); ld_addr = LAW'(addr);
    for (int n = 0; n < K; n++) ld_data[n] = d[n];
    @(posedge clk); #1;
  endtask

  initial begin
    fix_t s [];
    real wb [];
    // model values
    for (int g = 0; g < 4; g++) for (int i = 0; i < P1; i++) for (int j = 0; j < Q1; j++)
      for (int n = 0; n < K; n++) w1[g][i][j][n] = hrand(g, i, j, n, AMP1);
    for (int i = 0; i < QY; i++) for (int j = 0; j < P1; j++)
      for (int n = 0; n < K; n++) w3[i][j][n] = hrand(9, i, j, n, AMP3);
    for (int v = 0; v < 7; v++) for (int e = 0; e < CELL; e++)
      pb[v][e] = r12(q12(hrand(11, v, e, 1, 0.5)));
    for (int f = 0; f < NF; f++) for (int e = 0; e < QX * K; e++)
      xin[f][e] = (e < XD) ? r12(q12(hrand(12, f, e, 2, 1.0))) : 3.0 + e;
    build_reference();

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    wb = new[K];
    s = new[K];
    for (int g = 0; g < 4; g++) for (int i = 0; i < P1; i++) for (int j = 0; j < Q1; j++) begin
      foreach (wb[n]) wb[n] = w1[g][i][j][n];
      half_spec(wb, s);
      load_line(g, i * Q1 + j, s);
    end
    for (int i = 0; i < QY; i++) for (int j = 0; j < P1; j++) begin
      foreach (wb[n]) wb[n] = w3[i][j][n];
      half_spec(wb, s);
      load_line(4, i * P1 + j, s);
    end
    for (int v = 0; v < 7; v++) for (int b = 0; b < P1; b++) begin
      for (int n = 0; n < K; n++) s[n] = q12(pb[v][b * K + n]);
      load_line(5 + v, b, s);
    end
    ld_we = 0;

    for (int f = 0; f < NF; f++) begin
      while (!x_ready) begin n_wait++; @(posedge clk); #1; end
      for (int b = 0; b < QX; b++) begin
        x_we = 1; x_addr = QXW'(b);
        for (int n = 0; n < K; n++) x_data[n] = q12(xin[f][b * K + n]);
        @(posedge clk); #1;
      end
      x_we = 0;
      x_commit = 1; x_seq_start = SEQ[f];
      if (SEQ[f]) n_seq++; else n_cont++;
      @(posedge clk); #1;
      x_commit = 0; x_seq_start = 0;
    end

    while (f_out < NF) @(posedge clk);
    repeat (5) @(posedge clk);

    checks++;
    if (f_out != NF) begin failures++; $display("%0d frames out", f_out); end
    $display("steps %0d, recurrence stalls %0d, full-overlap steps %0d, drain steps %0d",
             n_steps, n_stall, n_full, n_drain);
    $display("sequence starts %0d, continuing frames %0d, host wait cycles %0d, max |y error| %f",
             n_seq, n_cont, n_wait, maxe);
    checks += 6;
    if (n_stall == 0) begin failures++; $display("no recurrence stall seen"); end
    if (n_full  == 0) begin failures++; $display("no full-overlap step seen"); end
    if (n_drain == 0) begin failures++; $display("no drain step seen"); end
    if (n_seq   == 0) begin failures++; $display("no sequence start seen"); end
    if (n_cont  == 0) begin failures++; $display("no continuing frame seen"); end
    if (n_wait  == 0) begin failures++; $display("host never waited for the input buffer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
