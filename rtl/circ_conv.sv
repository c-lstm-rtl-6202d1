// circ_conv: the circulant convolution operator of C-LSTM.
//
// One row of a block-circulant weight matrix times a vector: for row block i it computes
//     a_i = IDFT( sum_j  F(w_ij) .* F(x_j) )
// where x_j are the K-element blocks of the input vector and F(w_ij) the DFTs of the vectors
// that define the K x K circulant blocks. The weight DFTs are computed off line and arrive with
// each input block; only the input block is transformed here. Because the IDFT is linear it is
// applied once, after the accumulation ("DFT-IDFT decoupling"), not once per block.
//
// Conjugate symmetry. Both operands are DFTs of real vectors, so bin K-m is the conjugate of
// bin m and only bins 0..K/2 are multiplied and accumulated (bins 0 and K/2 are real). A
// half spectrum of K reals is packed as
//     word 0 = Re X[0], word 1 = Re X[K/2], word 2m = Re X[m], word 2m+1 = Im X[m] (m = 1..K/2-1)
// which is the layout of w_spec. The full spectrum is rebuilt before the inverse transform.
//
// Pipeline, one block per clock (in_valid, in_first marks j = first, in_last j = last):
//   FFT of x_j, 1-bit right shift per stage (log2 K cycles; this applies the 1/K of the IDFT)
//   element-wise complex multiply with F(w_ij)            (1 cycle)
//   accumulate over j                                      (1 cycle)
//   conjugate, unscaled FFT, take the real part = IDFT     (log2 K cycles)
// out_valid pulses LAT = 2*log2(K)+2 cycles after the in_last block; groups may follow each
// other back to back, also groups of a single block. The weight is delayed inside to meet its
// block at the multiplier.
//
// Follows the paper: DFT-IDFT decoupling, precomputed weight spectra, conjugate symmetry, the
// shift placement and the Conj-FFT form of the IDFT. Own choices: the packing of the half
// spectrum, an ACC_W-bit accumulator that saturates to 16 bits before the IDFT, and the
// circulant convention a[n] = sum_m w[(n-m) mod K] x[m].
module circ_conv
  import clstm_pkg::*;
#(
  parameter int unsigned K     = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_first,
  input  logic in_last,
  input  fix_t x_blk  [K],
  input  fix_t w_spec [K],
  output logic out_valid,
  output fix_t a_blk  [K]
);
  localparam int unsigned L   = $clog2(K);
  localparam int unsigned H   = K / 2;
  localparam int unsigned LAT = 2 * L + 2;

  // ---------------- forward FFT of the input block ----------------
  fix_t zero_im [K];
  fix_t fx_re [K];
  fix_t fx_im [K];
  logic fx_valid;

  always_comb for (int n = 0; n < K; n++) zero_im[n] = '0;

  fft_pipe #(.N(K), .SCALE(1'b1)) u_dft (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_re    (x_blk),
    .in_im    (zero_im),
    .out_valid(fx_valid),
    .out_re   (fx_re),
    .out_im   (fx_im)
  );

  // Weight spectrum and group flags travel alongside the FFT.
  fix_t w_dly [L][K];
  logic [L-1:0] first_dly, last_dly;

  always_ff @(posedge clk) begin
    w_dly[0] <= w_spec;
    for (int s = 1; s < L; s++) w_dly[s] <= w_dly[s-1];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_dly <= '0;
      last_dly  <= '0;
    end else begin
      first_dly <= {first_dly[L-2:0], in_first};
      last_dly  <= {last_dly[L-2:0],  in_last};
    end
  end

  // ---------------- element-wise multiply, bins 0..K/2 ----------------
  logic signed [ACC_W-1:0] p_re [H+1];
  logic signed [ACC_W-1:0] p_im [H+1];
  logic p_valid, p_first, p_last;

  function automatic logic signed [ACC_W-1:0] mulq(input fix_t a, input fix_t b);
    return ACC_W'(rshift_round(48'(a) * 48'(b), FRAC));
  endfunction

  always_ff @(posedge clk) begin
    fix_t wr, wi;
    p_re[0] <= mulq(fx_re[0], w_dly[L-1][0]);
    p_im[0] <= '0;
    p_re[H] <= mulq(fx_re[H], w_dly[L-1][1]);
    p_im[H] <= '0;
    for (int m = 1; m < H; m++) begin
      wr = w_dly[L-1][2*m];
      wi = w_dly[L-1][2*m+1];
      p_re[m] <= mulq(fx_re[m], wr) - mulq(fx_im[m], wi);
      p_im[m] <= mulq(fx_re[m], wi) + mulq(fx_im[m], wr);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
    end else begin
      p_valid <= fx_valid;
      p_first <= first_dly[L-1];
      p_last  <= last_dly[L-1];
    end
  end

  // ---------------- accumulation over the blocks of a row ----------------
  logic signed [ACC_W-1:0] acc_re [H+1];
  logic signed [ACC_W-1:0] acc_im [H+1];
  logic acc_done;

  always_ff @(posedge clk) begin
    if (p_valid) begin
      for (int m = 0; m <= H; m++) begin
        acc_re[m] <= (p_first ? '0 : acc_re[m]) + p_re[m];
        acc_im[m] <= (p_first ? '0 : acc_im[m]) + p_im[m];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_done <= 1'b0;
    else        acc_done <= p_valid & p_last;
  end

  // ---------------- IDFT = Re( FFT( conj(Z) ) ), unscaled ----------------
  fix_t iz_re [K];
  fix_t iz_im [K];
  fix_t ix_re [K];
  fix_t ix_im [K];

  always_comb begin
    for (int m = 0; m <= H; m++) begin
      iz_re[m] = sat(48'(acc_re[m]));
      iz_im[m] = sat(-48'(acc_im[m]));          // conj(Z[m])
    end
    for (int m = 1; m < H; m++) begin
      iz_re[K-m] = sat(48'(acc_re[m]));         // conj(Z[K-m]) = Z[m]
      iz_im[K-m] = sat(48'(acc_im[m]));
    end
  end

  fft_pipe #(.N(K), .SCALE(1'b0)) u_idft (
    .clk, .rst_n,
    .in_valid (acc_done),
    .in_re    (iz_re),
    .in_im    (iz_im),
    .out_valid(out_valid),
    .out_re   (ix_re),
    .out_im   (ix_im)
  );

  assign a_blk = ix_re;

endmodule
