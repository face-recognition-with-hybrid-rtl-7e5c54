// fft_conv_engine: FFT-based convolution engine of the paper's FFT engine
// figure: 2D FFT of the input tile (row FFT array, transpose matrix, column
// FFT array, see fft2d), a MAC array that multiplies the spectrum point by
// point with PAR_K pre-transformed kernel spectra, and a partial sum buffer
// that accumulates those products over the input channels. Only after the
// last input channel is each of the PAR_K accumulated spectra sent through
// an inverse 2D FFT (the paper buffers intermediate results "to prevent
// unnecessary IFFTs"); the same fft2d unit is reused for the inverse.
//
// Interface and timing, per input channel: when ready is high the caller
// presents in_valid with the zero-padded N x N tile x (Q.FRAC), in_first on
// the first channel and in_last on the last. The engine copies x, runs the
// forward 2D FFT and then one spectrum row per cycle through the MAC array:
// ready rises again 2*N/CORES + N + 3 cycles after the accepting edge. During that phase krow_idx names the row
// and the caller must answer, combinationally, with krow: that row of the
// PAR_K kernel spectra of the current channel (conj(FFT2(w)) in Q.FRAC, so
// that the engine computes the correlation a CNN layer wants; computed
// offline, as the paper does for kernels). After the last channel, for each
// kernel k, one inverse 2D FFT and then N cycles with out_valid high that
// stream the real part of row out_row of plane out_k, rounded, biased and
// saturated, in out_data. Then ready rises again. The caller takes the valid
// output window (H x W) from the top-left of each plane. The MAC array's
// shape (PAR_K x N complex multipliers, one row per cycle) and the 40-bit
// internal word are this design's choices.
module fft_conv_engine
  import hec_pkg::*;
#(
  parameter int N     = 32,
  parameter int PAR_K = 4,
  parameter int CORES = 4,
  parameter int W     = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  data_t                    x        [N][N],
  output logic                     ready,
  output logic [$clog2(N)-1:0]     krow_idx,
  input  cdata_t                   krow     [PAR_K][N],
  input  data_t                    bias     [PAR_K],
  output logic                     out_valid,
  output logic [$clog2(PAR_K+1)-1:0] out_k,
  output logic [$clog2(N)-1:0]     out_row,
  output data_t                    out_data [N]
);
  localparam int RW = $clog2(N);
  localparam int KW = $clog2(PAR_K + 1);
  localparam int PW = W + DW + 2;

  typedef logic signed [W-1:0]  word_t;
  typedef logic signed [PW-1:0] prod_t;

  typedef enum logic [2:0] {S_IDLE, S_FFT, S_MAC, S_IFFT, S_OUT} state_e;
  state_e state;

  data_t        xin     [N][N];
  word_t        psum_re [PAR_K][N][N];
  word_t        psum_im [PAR_K][N][N];
  logic         first_q, last_q;
  logic [RW-1:0] row;
  logic [KW-1:0] kk;

  logic  f_start, f_inv, f_busy, f_done;
  word_t f_x_re [N][N], f_x_im [N][N], tm_re [N][N], tm_im [N][N];

  always_comb begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        if (f_inv) begin
          f_x_re[r][c] = psum_re[int'(kk) % PAR_K][r][c];
          f_x_im[r][c] = psum_im[int'(kk) % PAR_K][r][c];
        end else begin
          f_x_re[r][c] = word_t'(xin[r][c]);
          f_x_im[r][c] = '0;
        end
      end
  end

  fft2d #(.N(N), .W(W), .CORES(CORES)) u_fft2d (
    .clk, .rst_n, .start(f_start), .inv(f_inv), .x_re(f_x_re), .x_im(f_x_im),
    .busy(f_busy), .done(f_done), .tm_re(tm_re), .tm_im(tm_im));

  // MAC array: spectrum row `row` times PAR_K kernel rows, complex.
  word_t mac_re [PAR_K][N], mac_im [PAR_K][N];
  always_comb begin
    for (int k = 0; k < PAR_K; k++)
      for (int c = 0; c < N; c++) begin
        prod_t xr, xi, kr, ki;
        logic signed [PW-1:0] pr, pi;  // top bits dropped on the write to the W-bit buffer
        xr = prod_t'(tm_re[row][c]);
        xi = prod_t'(tm_im[row][c]);
        kr = prod_t'(krow[k][c].re);
        ki = prod_t'(krow[k][c].im);
        pr = (xr * kr - xi * ki + (prod_t'(1) <<< (FRAC - 1))) >>> FRAC;
        pi = (xr * ki + xi * kr + (prod_t'(1) <<< (FRAC - 1))) >>> FRAC;
        mac_re[k][c] = (first_q ? word_t'(0) : psum_re[k][row][c]) + word_t'(pr);
        mac_im[k][c] = (first_q ? word_t'(0) : psum_im[k][row][c]) + word_t'(pi);
      end
  end

  assign ready    = (state == S_IDLE);
  assign krow_idx = row;
  assign f_inv    = (state == S_IFFT) || (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      f_start   <= 1'b0;
      first_q   <= 1'b0;
      last_q    <= 1'b0;
      row       <= '0;
      kk        <= '0;
      out_valid <= 1'b0;
      out_k     <= '0;
      out_row   <= '0;
      for (int c = 0; c < N; c++) out_data[c] <= '0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          xin[r][c] <= '0;
          for (int k = 0; k < PAR_K; k++) begin
            psum_re[k][r][c] <= '0;
            psum_im[k][r][c] <= '0;
          end
        end
    end else begin
      f_start   <= 1'b0;
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          xin     <= x;
          first_q <= in_first;
          last_q  <= in_last;
          f_start <= 1'b1;
          state   <= S_FFT;
        end
        S_FFT: if (f_done) begin
          row   <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          for (int k = 0; k < PAR_K; k++)
            for (int c = 0; c < N; c++) begin
              psum_re[k][row][c] <= mac_re[k][c];
              psum_im[k][row][c] <= mac_im[k][c];
            end
          if (int'(row) == N - 1) begin
            row <= '0;
            if (last_q) begin
              kk      <= '0;
              f_start <= 1'b1;
              state   <= S_IFFT;
            end else state <= S_IDLE;
          end else row <= row + 1'b1;
        end
        S_IFFT: if (f_done) begin
          row   <= '0;
          state <= S_OUT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_k     <= kk;
          out_row   <= row;
          for (int c = 0; c < N; c++)
            out_data[c] <= sat16(acc_t'(tm_re[row][c]) + acc_t'(bias[int'(kk) % PAR_K]));
          if (int'(row) == N - 1) begin
            row <= '0;
            if (int'(kk) == PAR_K - 1) state <= S_IDLE;
            else begin
              kk      <= kk + 1'b1;
              f_start <= 1'b1;
              state   <= S_IFFT;
            end
          end else row <= row + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The fft2d unit is only started while it is idle.
  assert property (@(posedge clk) disable iff (!rst_n) f_start |-> !f_busy);
endmodule
