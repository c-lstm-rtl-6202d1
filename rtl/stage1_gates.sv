// stage1_gates: stage 1 of the pipeline, the four gate matrix products.
//
// For one frame it computes, for the input gate, forget gate, cell input and output gate,
//     a_* = W_*(xr) [x_t, y_t-1]
// with the weights of x and of the recurrent input fused into one block-circulant matrix per
// gate, as the paper does. The concatenated vector is read block by block from two buffers: the
// input-feature buffer (QX = ceil(X_DIM/K) blocks; elements past X_DIM are forced to zero, so the
// feature vector is zero padded to whole blocks) and the recurrent buffer holding y_t-1
// (QY = PROJ/K blocks). When the frame starts a new sequence (seq_start at start) y_t-1 is taken
// as zero. The four products are written to the gate double buffer, one row block (K cells, all
// four gates) per write, at block address 0..CELL/K-1.
//
// Timing: start pulse, then done after (CELL/K)*(QX+QY) + 2*log2(K) + 4 cycles, see bc_matvec.
// Buffer read ports return data one cycle after the request.
module stage1_gates
  import clstm_pkg::*;
#(
  parameter int unsigned K     = 8,
  parameter int unsigned X_DIM = 153,
  parameter int unsigned CELL  = 1024,
  parameter int unsigned PROJ  = 512,
  localparam int unsigned QX  = (X_DIM + K - 1) / K,
  localparam int unsigned QY  = PROJ / K,
  localparam int unsigned Q1  = QX + QY,
  localparam int unsigned P1  = CELL / K,
  localparam int unsigned QXW = (QX > 1) ? $clog2(QX) : 1,
  localparam int unsigned QYW = (QY > 1) ? $clog2(QY) : 1,
  localparam int unsigned Q1W = $clog2(Q1),
  localparam int unsigned P1W = $clog2(P1),
  localparam int unsigned WAW = $clog2(P1 * Q1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          seq_start,
  output logic                          busy,
  output logic                          done,
  output logic                          x_rd,
  output logic [QXW-1:0]                x_addr,
  input  logic [K-1:0][DATA_W-1:0]      x_data,
  output logic                          y_rd,
  output logic [QYW-1:0]                y_addr,
  input  logic [K-1:0][DATA_W-1:0]      y_data,
  output logic                          g_we,
  output logic [P1W-1:0]                g_addr,
  output logic [3:0][K-1:0][DATA_W-1:0] g_data,
  input  logic                          ld_we,
  input  logic [1:0]                    ld_sel,
  input  logic [WAW-1:0]                ld_addr,
  input  logic [K-1:0][DATA_W-1:0]      ld_data
);
  logic           in_rd;
  logic [Q1W-1:0] in_addr;
  logic [K-1:0][DATA_W-1:0] in_data;

  // [x_t, y_t-1] concatenation
  logic           is_y, is_y_q, zero_y, rd_q;
  logic [Q1W-1:0] j_q;

  assign is_y   = (in_addr >= Q1W'(QX));
  assign x_rd   = in_rd && !is_y;
  assign x_addr = QXW'(in_addr);
  assign y_rd   = in_rd && is_y;
  assign y_addr = QYW'(in_addr - Q1W'(QX));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zero_y <= 1'b0;
      is_y_q <= 1'b0;
      rd_q   <= 1'b0;
      j_q    <= '0;
    end else begin
      if (start && !busy) zero_y <= seq_start;
      is_y_q <= is_y;
      rd_q   <= in_rd;
      j_q    <= in_addr;
    end
  end

  always_comb begin
    for (int n = 0; n < K; n++) begin
      if (is_y_q) in_data[n] = zero_y ? '0 : y_data[n];
      else        in_data[n] = (int'(j_q) * K + n < X_DIM) ? x_data[n] : '0;
    end
  end

  bc_matvec #(.K(K), .G(4), .P(P1), .Q(Q1)) u_mv (
    .clk, .rst_n,
    .start, .busy, .done,
    .in_rd, .in_addr, .in_data,
    .out_we(g_we), .out_addr(g_addr), .out_data(g_data),
    .ld_we, .ld_sel, .ld_addr, .ld_data
  );

  // reads never run past the concatenated vector
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n) rd_q |-> (int'(j_q) < int'(Q1)));

endmodule
