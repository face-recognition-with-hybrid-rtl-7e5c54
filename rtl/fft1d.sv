// fft1d: one 1D FFT core of the 2D FFT engine (one box of the paper's "1D FFT
// Array" in its FFT engine figure): an N-point radix-2 decimation-in-time
// FFT, fully unrolled and combinational (log2(N) butterfly stages).
//
// Data are complex fixed point, W bits per part. Twiddle factors are
// constants in Q1.14 (hec_pkg::twiddle_q); each product is rounded back to W
// bits. With inv = 0 the core computes X[k] = sum x[n] exp(-2 pi i n k / N)
// with no scaling (the caller's word width must hold the growth). With
// inv = 1 it uses conjugate twiddles and halves the result of every stage,
// so it computes the inverse DFT, including the 1/N. The paper gives the
// engine's structure (rows, transpose, columns) but not the FFT core's
// insides: radix 2 follows its "Radix-2 FFT inputs must be of size of powers
// of 2"; the unrolled form and the number formats are this design's choice.
module fft1d
  import hec_pkg::*;
#(
  parameter int N = 32,
  parameter int W = 40
) (
  input  logic                inv,
  input  logic signed [W-1:0] x_re [N],
  input  logic signed [W-1:0] x_im [N],
  output logic signed [W-1:0] y_re [N],
  output logic signed [W-1:0] y_im [N]
);
  localparam int LOGN = clog2i(N);
  localparam int PW   = W + TWQ + 2;

  typedef logic signed [W-1:0]  word_t;
  typedef logic signed [PW-1:0] prod_t;

  word_t b_re [N];   // input in bit-reversed order
  word_t b_im [N];

  function automatic int bitrev(input int v, input int bits);
    int r;
    r = 0;
    for (int b = 0; b < bits; b++) if (v[b]) r = r | (1 << (bits - 1 - b));
    return r;
  endfunction

  // Rounded arithmetic shift right by sh (sh >= 1).
  function automatic prod_t rshr(input prod_t v, input int sh);
    return (v + (prod_t'(1) <<< (sh - 1))) >>> sh;
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_in
    assign b_re[n] = x_re[bitrev(n, LOGN)];
    assign b_im[n] = x_im[bitrev(n, LOGN)];
  end

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    localparam int HALF = 1 << s;
    localparam int SPAN = 2 * HALF;
    word_t i_re [N], i_im [N];   // stage input
    word_t o_re [N], o_im [N];   // stage output
    if (s == 0) begin : g_first
      assign i_re = b_re;
      assign i_im = b_im;
    end else begin : g_next
      assign i_re = g_stage[s-1].o_re;
      assign i_im = g_stage[s-1].o_im;
    end
    for (genvar g = 0; g < N / SPAN; g++) begin : g_grp
      for (genvar j = 0; j < HALF; j++) begin : g_bfly
        localparam int A  = g * SPAN + j;
        localparam int B  = A + HALF;
        localparam int TC = twiddle_q(j * (N / SPAN), N, 1'b0);
        localparam int TS = twiddle_q(j * (N / SPAN), N, 1'b1);
        prod_t br, bi, tr, ti, ar, ai, o0r, o0i, o1r, o1i;
        prod_t ts;
        always_comb begin
          br = prod_t'(i_re[B]);
          bi = prod_t'(i_im[B]);
          ar = prod_t'(i_re[A]);
          ai = prod_t'(i_im[A]);
          // forward twiddle exp(-i t) = c - i s, inverse uses c + i s
          ts = inv ? -prod_t'(TS) : prod_t'(TS);
          tr = rshr(br * prod_t'(TC) + bi * ts, TWQ);
          ti = rshr(bi * prod_t'(TC) - br * ts, TWQ);
          o0r = ar + tr;
          o0i = ai + ti;
          o1r = ar - tr;
          o1i = ai - ti;
          if (inv) begin
            o0r = rshr(o0r, 1);
            o0i = rshr(o0i, 1);
            o1r = rshr(o1r, 1);
            o1i = rshr(o1i, 1);
          end
        end
        assign o_re[A] = word_t'(o0r);
        assign o_im[A] = word_t'(o0i);
        assign o_re[B] = word_t'(o1r);
        assign o_im[B] = word_t'(o1i);
      end
    end
  end

  assign y_re = g_stage[LOGN-1].o_re;
  assign y_im = g_stage[LOGN-1].o_im;

  initial assert ((1 << LOGN) == N) else $error("fft1d: N must be a power of two");
endmodule
