// bc_matvec: block-circulant matrix-vector engine with its weight buffers.
//
// Computes G products a_g = W_g v at once, where every W_g is a (P*K) x (Q*K) block-circulant
// matrix stored as the half spectra F(w_gij) of its P*Q defining vectors (one K-word memory line
// per block, address i*Q + j), and v is a vector of Q blocks of K words read from an outside
// buffer. One circ_conv per matrix; all G share the input stream.
//
// Operation: a start pulse begins a pass. Row block i = 0..P-1 and column block j = 0..Q-1 are
// visited in row-major order, one (i, j) per clock: the engine asserts in_rd with in_addr = j and
// reads line i*Q + j of every weight memory; both answers arrive on the next clock and enter the
// circ_conv units, which accumulate over j and return row block i of every product
// 2*log2(K)+2 cycles after its last column. Each row block is written out with out_we at
// out_addr = i, all G results in one word. done pulses one cycle after the last write, which is
// CYCLES = P*Q + 2*log2(K) + 4 cycles after start; busy is high in between.
//
// Loading: ld_we writes ld_data into line ld_addr of weight memory ld_sel, at any time the engine
// is not reading it.
//
// This is the compute engine of stages 1 and 3 of the paper's architecture. The processing
// order and the rate of one block per clock per matrix are this design's own choices; the paper
// tunes the parallelism per design by its scheduling algorithm.
module bc_matvec
  import clstm_pkg::*;
#(
  parameter int unsigned K = 8,
  parameter int unsigned G = 4,
  parameter int unsigned P = 128,
  parameter int unsigned Q = 84,
  localparam int unsigned QW = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned WAW = $clog2(P * Q),
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // input vector read port (data one cycle after in_rd)
  output logic                       in_rd,
  output logic [QW-1:0]              in_addr,
  input  logic [K-1:0][DATA_W-1:0]   in_data,
  // result write port
  output logic                       out_we,
  output logic [PW-1:0]              out_addr,
  output logic [G-1:0][K-1:0][DATA_W-1:0] out_data,
  // weight loading
  input  logic                       ld_we,
  input  logic [GW-1:0]              ld_sel,
  input  logic [WAW-1:0]             ld_addr,
  input  logic [K-1:0][DATA_W-1:0]   ld_data
);
  // ---------------- sequencer ----------------
  logic          issuing;
  logic [QW-1:0] j_cnt;
  logic [PW-1:0] i_cnt;
  logic [WAW-1:0] w_addr;
  logic          rd_q, first_q, last_q;
  logic [PW-1:0] o_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      j_cnt   <= '0;
      i_cnt   <= '0;
      w_addr  <= '0;
      rd_q    <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      o_cnt   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        j_cnt   <= '0;
        i_cnt   <= '0;
        w_addr  <= '0;
        o_cnt   <= '0;
      end else if (issuing) begin
        w_addr <= w_addr + 1'b1;
        if (j_cnt == QW'(Q - 1)) begin
          j_cnt <= '0;
          if (i_cnt == PW'(P - 1)) issuing <= 1'b0;
          else                     i_cnt <= i_cnt + 1'b1;
        end else begin
          j_cnt <= j_cnt + 1'b1;
        end
      end
      rd_q    <= issuing;
      first_q <= issuing && (j_cnt == '0);
      last_q  <= issuing && (j_cnt == QW'(Q - 1));
      if (out_we) begin
        o_cnt <= o_cnt + 1'b1;
        if (o_cnt == PW'(P - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign in_rd   = issuing;
  assign in_addr = j_cnt;

  // ---------------- weight memories and circulant convolutions ----------------
  fix_t x_blk [K];
  always_comb for (int n = 0; n < K; n++) x_blk[n] = fix_t'(in_data[n]);

  logic [G-1:0] cc_valid;

  for (genvar g = 0; g < G; g++) begin : g_mat
    logic [K-1:0][DATA_W-1:0] w_line;
    fix_t w_spec [K];
    fix_t a_blk  [K];

    sdp_ram #(.DEPTH(P * Q), .WIDTH(K * DATA_W)) u_wmem (
      .clk,
      .we    (ld_we && (ld_sel == GW'(g))),
      .waddr (ld_addr),
      .wdata (ld_data),
      .re    (issuing),
      .raddr (w_addr),
      .rdata (w_line)
    );

    always_comb for (int n = 0; n < K; n++) w_spec[n] = fix_t'(w_line[n]);

    circ_conv #(.K(K)) u_cc (
      .clk, .rst_n,
      .in_valid (rd_q),
      .in_first (first_q),
      .in_last  (last_q),
      .x_blk    (x_blk),
      .w_spec   (w_spec),
      .out_valid(cc_valid[g]),
      .a_blk    (a_blk)
    );

    always_comb for (int n = 0; n < K; n++) out_data[g][n] = a_blk[n];
  end

  assign out_we   = cc_valid[0];
  assign out_addr = o_cnt;

  // all convolution units run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (cc_valid == '0 || cc_valid == '1));

endmodule
