// stage2_cell: stage 2 of the pipeline, the element-wise LSTM cell over all CELL cells.
//
// K lanes (lstm_cell_lane) process one block of K cells per clock. For block b = 0..CELL/K-1 the
// stage reads, in the same cycle, the four gate pre-activations from the gate double buffer, the
// previous cell state c_t-1 from the cell-state memory, the three peephole vectors w_ic, w_fc,
// w_oc and the four biases from their memories. Nine cycles later the lanes return c_t, which is
// written back into the cell-state memory, and m_t, which is written to the double buffer
// feeding stage 3. When the frame starts a new sequence (seq_start with start) c_t-1 is taken as
// zero, so the cell-state memory needs no clearing.
//
// Timing: start pulse, done CELL/K + 11 cycles later; one block per clock.
//
// Loading: ld_sel 0..2 = w_ic, w_fc, w_oc; 3..6 = b_i, b_f, b_c, b_o; one line of K values per
// block address ld_addr.
//
// Follows the paper's stage 2 (peephole products, bias adders, activations, c_t and m_t), with
// its memories for peephole weights and biases. The paper labels the peephole memory with the
// DFT of w_c; the peephole matrices are diagonal and are applied element-wise here, so the
// memory holds the plain vectors. The lane count K is this design's choice.
module stage2_cell
  import clstm_pkg::*;
#(
  parameter int unsigned K    = 8,
  parameter int unsigned CELL = 1024,
  localparam int unsigned P1  = CELL / K,
  localparam int unsigned P1W = $clog2(P1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          seq_start,
  output logic                          busy,
  output logic                          done,
  output logic                          g_rd,
  output logic [P1W-1:0]                g_addr,
  input  logic [3:0][K-1:0][DATA_W-1:0] g_data,
  output logic                          m_we,
  output logic [P1W-1:0]                m_addr,
  output logic [K-1:0][DATA_W-1:0]      m_data,
  input  logic                          ld_we,
  input  logic [2:0]                    ld_sel,
  input  logic [P1W-1:0]                ld_addr,
  input  logic [K-1:0][DATA_W-1:0]      ld_data
);
  logic           issuing, rd_q, zero_c;
  logic [P1W-1:0] b_cnt, o_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      zero_c  <= 1'b0;
      rd_q    <= 1'b0;
      b_cnt   <= '0;
      o_cnt   <= '0;
    end else begin
      done <= 1'b0;
      rd_q <= issuing;
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        zero_c  <= seq_start;
        b_cnt   <= '0;
        o_cnt   <= '0;
      end else if (issuing) begin
        b_cnt <= b_cnt + 1'b1;
        if (b_cnt == P1W'(P1 - 1)) issuing <= 1'b0;
      end
      if (m_we) begin
        o_cnt <= o_cnt + 1'b1;
        if (o_cnt == P1W'(P1 - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign g_rd   = issuing;
  assign g_addr = b_cnt;

  // peephole (0..2) and bias (3..6) memories
  logic [K-1:0][DATA_W-1:0] pb [7];
  for (genvar v = 0; v < 7; v++) begin : g_pbmem
    sdp_ram #(.DEPTH(P1), .WIDTH(K * DATA_W)) u_mem (
      .clk,
      .we    (ld_we && (ld_sel == 3'(v))),
      .waddr (ld_addr),
      .wdata (ld_data),
      .re    (issuing),
      .raddr (b_cnt),
      .rdata (pb[v])
    );
  end

  // cell-state memory: read c_t-1 at issue, write c_t when the lanes return it
  logic [K-1:0][DATA_W-1:0] c_rd, c_wr;
  logic [K-1:0]             lane_v;

  sdp_ram #(.DEPTH(P1), .WIDTH(K * DATA_W)) u_cmem (
    .clk,
    .we    (m_we),
    .waddr (o_cnt),
    .wdata (c_wr),
    .re    (issuing),
    .raddr (b_cnt),
    .rdata (c_rd)
  );

  for (genvar n = 0; n < K; n++) begin : g_lane
    fix_t c_o, m_o;
    lstm_cell_lane u_lane (
      .clk, .rst_n,
      .in_valid (rd_q),
      .a_i      (fix_t'(g_data[GATE_I][n])),
      .a_f      (fix_t'(g_data[GATE_F][n])),
      .a_c      (fix_t'(g_data[GATE_C][n])),
      .a_o      (fix_t'(g_data[GATE_O][n])),
      .c_prev   (zero_c ? '0 : fix_t'(c_rd[n])),
      .w_ic     (fix_t'(pb[0][n])),
      .w_fc     (fix_t'(pb[1][n])),
      .w_oc     (fix_t'(pb[2][n])),
      .b_i      (fix_t'(pb[3][n])),
      .b_f      (fix_t'(pb[4][n])),
      .b_c      (fix_t'(pb[5][n])),
      .b_o      (fix_t'(pb[6][n])),
      .out_valid(lane_v[n]),
      .c_out    (c_o),
      .m_out    (m_o)
    );
    assign c_wr[n]   = c_o;
    assign m_data[n] = m_o;
  end

  assign m_we   = lane_v[0];
  assign m_addr = o_cnt;

endmodule
