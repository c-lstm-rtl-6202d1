// clstm_top: C-LSTM accelerator for one Google LSTM layer (peepholes and a projection layer),
// built as three coarse-grained pipeline stages joined by double buffers.
//
//   stage 1 (stage1_gates): a_* = W_*(xr) [x_t, y_t-1] for the four gates, by FFT-based
//            circulant convolution on block-circulant weights
//   stage 2 (stage2_cell):  peepholes, biases, sigmoids, c_t, tanh, m_t, element-wise
//   stage 3 (bc_matvec, one matrix): y_t = W_ym m_t, again by circulant convolution
// Between stages sit double buffers (pingpong_buf) for the gate pre-activations and for m_t; y_t
// goes to a third double buffer read by stage 1 of the next frame and is also streamed out.
// Every weight, peephole and bias value lives in on-chip memory and is loaded once.
//
// Steps. The stages run in lock step. A step starts all stages that have work, ends when all of
// them are done, and then swaps the double buffers that were filled. In a step stage 1 takes a
// new frame, stage 2 the frame stage 1 finished in the previous step, stage 3 the frame stage 2
// finished, so up to three frames are in flight and one frame leaves per step.
//
// Recurrence. y_t-1 feeds stage 1 of the next frame of the same sequence, and c_t-1 feeds stage 2.
// A frame that continues a sequence (x_seq_start = 0 at commit) therefore enters stage 1 only once
// its predecessor has left stage 3; until then it waits (recur_stall pulses at every step start
// that holds it back). A frame that starts a sequence (x_seq_start = 1) uses y_t-1 = 0 and
// c_t-1 = 0 and can enter at once, so independent sequences, or frames of interleaved
// sequences, fill the pipeline. The cell-state memory holds one sequence's state: frames must
// arrive in sequence order.
//
// Host interface.
//   x_we/x_addr/x_data write block x_addr (K features) of the next input frame; x_commit (with
//   x_seq_start) hands it over. x_ready is high while a frame may be written and committed.
//   ld_we/ld_target/ld_addr/ld_data load one K-word line of the model (see ld_target_e).
//   y_valid/y_addr/y_data stream out y_t, one block of K values per beat; frame_done pulses after
//   the last block of a frame.
//   step_start and stage_active report the pipeline steps (for monitoring and tests).
//
// Follows the paper: three stages and their operators, double buffers, on-chip weights, the
// recurrent feedback through a double buffer, 16-bit datapath, block size 8. Own choices: the
// step controller and its handshake, the sequence-start flag, the load interface and all widths
// not published (see clstm_pkg). The layer sizes X_DIM=153, CELL=1024, PROJ=512 are those of
// the Google LSTM configuration the paper evaluates.
module clstm_top
  import clstm_pkg::*;
#(
  parameter int unsigned K     = 8,
  parameter int unsigned X_DIM = 153,
  parameter int unsigned CELL  = 1024,
  parameter int unsigned PROJ  = 512,
  localparam int unsigned QX   = (X_DIM + K - 1) / K,
  localparam int unsigned QY   = PROJ / K,
  localparam int unsigned P1   = CELL / K,
  localparam int unsigned Q1   = QX + QY,
  localparam int unsigned QXW  = (QX > 1) ? $clog2(QX) : 1,
  localparam int unsigned QYW  = (QY > 1) ? $clog2(QY) : 1,
  localparam int unsigned P1W  = $clog2(P1),
  localparam int unsigned W1AW = $clog2(P1 * Q1),
  localparam int unsigned W3AW = $clog2(QY * P1),
  localparam int unsigned LAW  = (W1AW > W3AW) ? W1AW : W3AW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input frames
  input  logic                     x_we,
  input  logic [QXW-1:0]           x_addr,
  input  logic [K-1:0][DATA_W-1:0] x_data,
  input  logic                     x_commit,
  input  logic                     x_seq_start,
  output logic                     x_ready,
  // model loading
  input  logic                     ld_we,
  input  logic [3:0]               ld_target,
  input  logic [LAW-1:0]           ld_addr,
  input  logic [K-1:0][DATA_W-1:0] ld_data,
  // output y_t
  output logic                     y_valid,
  output logic [QYW-1:0]           y_addr,
  output logic [K-1:0][DATA_W-1:0] y_data,
  output logic                     frame_done,
  // monitoring
  output logic                     step_start,
  output logic [2:0]               stage_active,
  output logic                     recur_stall
);
  typedef enum logic [3:0] {
    LD_W_I = 4'd0, LD_W_F = 4'd1, LD_W_C = 4'd2, LD_W_O = 4'd3,   // F(w_*(xr)), line i*Q1+j
    LD_W_YM = 4'd4,                                                // F(w_ym), line i*(CELL/K)+j
    LD_P_IC = 4'd5, LD_P_FC = 4'd6, LD_P_OC = 4'd7,                 // peepholes, line = block
    LD_B_I = 4'd8, LD_B_F = 4'd9, LD_B_C = 4'd10, LD_B_O = 4'd11    // biases, line = block
  } ld_target_e;

  // ---------------- step controller ----------------
  logic       running;
  logic [2:0] act, fin;
  logic       x_full, x_seq;        // a committed frame waits for stage 1
  logic       s2_pend, s3_pend;     // frames waiting for stage 2 / stage 3
  logic       seq1;                 // sequence-start flag of the frame in stage 1
  logic       s1_done, s2_done, s3_done;
  logic       can1, go;
  logic       sw_x, sw_g, sw_m, sw_y;
  logic [2:0] fin_n;
  logic       step_end;

  assign can1     = x_full && (x_seq || (!s2_pend && !s3_pend));
  assign go       = !running && (can1 || s2_pend || s3_pend);
  assign fin_n    = fin | {s3_done, s2_done, s1_done};
  assign step_end = running && ((fin_n & act) == act);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      act        <= '0;
      fin        <= '0;
      x_full     <= 1'b0;
      x_seq      <= 1'b0;
      s2_pend    <= 1'b0;
      s3_pend    <= 1'b0;
      seq1       <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (go) begin
        running <= 1'b1;
        act     <= {s3_pend, s2_pend, can1};
        fin     <= '0;
        if (can1) seq1 <= x_seq;
      end else if (step_end) begin
        running    <= 1'b0;
        s2_pend    <= act[0];
        s3_pend    <= act[1];
        frame_done <= act[2];
      end else if (running) begin
        fin <= fin_n;
      end
      // the committed frame is taken by stage 1 at the start of its step
      if (go && can1)   x_full <= 1'b0;
      else if (x_commit && !x_full) begin
        x_full <= 1'b1;
        x_seq  <= x_seq_start;
      end
    end
  end

  assign x_ready      = !x_full;
  assign step_start   = go;
  assign stage_active = running ? act : 3'b000;
  assign recur_stall  = go && x_full && !can1;

  assign sw_x = go && can1;
  assign sw_g = step_end && act[0];
  assign sw_m = step_end && act[1];
  assign sw_y = step_end && act[2];

  // ---------------- buffers between the stages ----------------
  logic                          x_rd, y_rd, g_rd, m_rd;
  logic [QXW-1:0]                x_raddr;
  logic [QYW-1:0]                y_raddr;
  logic [P1W-1:0]                g_raddr, m_raddr;
  logic [K-1:0][DATA_W-1:0]      x_rdata, y_rdata, m_rdata;
  logic [3:0][K-1:0][DATA_W-1:0] g_rdata;

  logic                          g_we, m_we, yb_we;
  logic [P1W-1:0]                g_waddr, m_waddr;
  logic [QYW-1:0]                yb_waddr;
  logic [3:0][K-1:0][DATA_W-1:0] g_wdata;
  logic [K-1:0][DATA_W-1:0]      m_wdata;
  logic [0:0][K-1:0][DATA_W-1:0] yb_wdata;
  logic                          x_wbank, g_wbank, m_wbank, y_wbank;

  // BRAM1, input features x_t: written by the host, read by stage 1
  pingpong_buf #(.DEPTH(QX), .WIDTH(K * DATA_W)) u_xbuf (
    .clk, .rst_n, .swap(sw_x), .wbank(x_wbank),
    .we(x_we), .waddr(x_addr), .wdata(x_data),
    .re(x_rd), .raddr(x_raddr), .rdata(x_rdata)
  );

  // gate pre-activations, stage 1 -> stage 2
  pingpong_buf #(.DEPTH(P1), .WIDTH(4 * K * DATA_W)) u_gbuf (
    .clk, .rst_n, .swap(sw_g), .wbank(g_wbank),
    .we(g_we), .waddr(g_waddr), .wdata(g_wdata),
    .re(g_rd), .raddr(g_raddr), .rdata(g_rdata)
  );

  // cell outputs m_t, stage 2 -> stage 3
  pingpong_buf #(.DEPTH(P1), .WIDTH(K * DATA_W)) u_mbuf (
    .clk, .rst_n, .swap(sw_m), .wbank(m_wbank),
    .we(m_we), .waddr(m_waddr), .wdata(m_wdata),
    .re(m_rd), .raddr(m_raddr), .rdata(m_rdata)
  );

  // projected outputs y_t, stage 3 -> stage 1 of the next frame
  pingpong_buf #(.DEPTH(QY), .WIDTH(K * DATA_W)) u_ybuf (
    .clk, .rst_n, .swap(sw_y), .wbank(y_wbank),
    .we(yb_we), .waddr(yb_waddr), .wdata(yb_wdata[0]),
    .re(y_rd), .raddr(y_raddr), .rdata(y_rdata)
  );

  // ---------------- model loading ----------------
  logic ld1, ld2, ld3;
  assign ld1 = ld_we && (ld_target <= LD_W_O);
  assign ld3 = ld_we && (ld_target == LD_W_YM);
  assign ld2 = ld_we && (ld_target >= LD_P_IC) && (ld_target <= LD_B_O);

  // ---------------- the three stages ----------------
  logic s1_busy, s2_busy, s3_busy;

  stage1_gates #(.K(K), .X_DIM(X_DIM), .CELL(CELL), .PROJ(PROJ)) u_stage1 (
    .clk, .rst_n,
    .start    (go && can1),
    .seq_start(x_seq),
    .busy     (s1_busy),
    .done     (s1_done),
    .x_rd     (x_rd), .x_addr(x_raddr), .x_data(x_rdata),
    .y_rd     (y_rd), .y_addr(y_raddr), .y_data(y_rdata),
    .g_we     (g_we), .g_addr(g_waddr), .g_data(g_wdata),
    .ld_we    (ld1),
    .ld_sel   (ld_target[1:0]),
    .ld_addr  (W1AW'(ld_addr)),
    .ld_data  (ld_data)
  );

  stage2_cell #(.K(K), .CELL(CELL)) u_stage2 (
    .clk, .rst_n,
    .start    (go && s2_pend),
    .seq_start(seq1),
    .busy     (s2_busy),
    .done     (s2_done),
    .g_rd     (g_rd), .g_addr(g_raddr), .g_data(g_rdata),
    .m_we     (m_we), .m_addr(m_waddr), .m_data(m_wdata),
    .ld_we    (ld2),
    .ld_sel   (3'(ld_target - LD_P_IC)),
    .ld_addr  (P1W'(ld_addr)),
    .ld_data  (ld_data)
  );

  bc_matvec #(.K(K), .G(1), .P(QY), .Q(P1)) u_stage3 (
    .clk, .rst_n,
    .start    (go && s3_pend),
    .busy     (s3_busy),
    .done     (s3_done),
    .in_rd    (m_rd), .in_addr(m_raddr), .in_data(m_rdata),
    .out_we   (yb_we), .out_addr(yb_waddr), .out_data(yb_wdata),
    .ld_we    (ld3),
    .ld_sel   (1'b0),
    .ld_addr  (W3AW'(ld_addr)),
    .ld_data  (ld_data)
  );

  assign y_valid = yb_we;
  assign y_addr  = yb_waddr;
  assign y_data  = yb_wdata[0];

  // a stage is started only when idle, and only active stages report done
  a_start1: assert property (@(posedge clk) disable iff (!rst_n) (go && can1) |-> !s1_busy);
  a_start2: assert property (@(posedge clk) disable iff (!rst_n) (go && s2_pend) |-> !s2_busy);
  a_start3: assert property (@(posedge clk) disable iff (!rst_n) (go && s3_pend) |-> !s3_busy);
  a_done:   assert property (@(posedge clk) disable iff (!rst_n)
                             ({s3_done, s2_done, s1_done} & ~act) == 3'b000);

endmodule
