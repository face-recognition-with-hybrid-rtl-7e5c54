// fft_branch: a KxK Inception branch (the 5x5 branch of Inception 3b and 4a
// in the paper's Table 4) computed by FFT-based convolution on an
// fft_conv_engine.
//
// For each output-channel group of PAR_K and each input channel it builds
// the N x N tile the engine transforms: the H x W input map with K/2 zeros
// of "same" padding at the top and left, and zeros up to N. With
// H + K - 1 <= N the circular correlation the engine computes has no
// wrap-around in its top-left H x W window, which is the output. The branch
// waits for the engine to be ready before each channel; the engine streams
// the output planes row by row after the group's last channel, and the
// branch keeps the H x W window. busy is high for
// (C_OUT/PAR_K) * (C_IN*(2N/CORES + N + 3) + PAR_K*(2N/CORES + N + 2) + 2)
// cycles. The paper pads 6/12/24 inputs to 8/16/32;
// N = 32 here fits the 24 x 24 maps of the default configuration.
//
// Memory layouts (flat word addresses):
//   input    (c*H + y)*W + x
//   weights  (((k*C_IN + c)*N + u)*N + v), one complex word {re, im} per
//            address: conj(FFT2(w_kc zero-padded to N x N)) in Q.FRAC
//   bias     k
//   output   (k*H + y)*W + x
module fft_branch
  import hec_pkg::*;
#(
  parameter int C_IN  = 16,
  parameter int C_OUT = 16,
  parameter int H     = 24,
  parameter int W     = 24,
  parameter int K     = 5,
  parameter int N     = 32,
  parameter int PAR_K = 4,
  parameter int CORES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_we,
  input  logic [31:0] in_addr,
  input  data_t       in_data,
  input  logic        wt_we,
  input  logic [31:0] wt_addr,
  input  cdata_t      wt_data,
  input  logic        b_we,
  input  logic [31:0] b_addr,
  input  data_t       b_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic [31:0] rd_addr,
  output data_t       rd_data
);
  localparam int P  = K / 2;
  localparam int G  = C_OUT / PAR_K;
  localparam int LN = $clog2(N);
  localparam int KW = $clog2(PAR_K + 1);

  data_t  ibuf [C_IN*H*W];
  cdata_t kmem [C_OUT*C_IN*N][N];
  data_t  bmem [C_OUT];
  data_t  obuf [C_OUT*H*W];

  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT} state_e;
  state_e state;
  int     g, c;

  data_t          x    [N][N];
  cdata_t         krow [PAR_K][N];
  data_t          bias [PAR_K];
  logic           e_ready, e_valid, e_out_valid;
  logic [LN-1:0]  krow_idx, out_row;
  logic [KW-1:0]  out_k;
  data_t          out_data [N];

  always_comb begin
    for (int uu = 0; uu < N; uu++)
      for (int vv = 0; vv < N; vv++) begin
        int yy, xx;
        yy = uu - P;
        xx = vv - P;
        x[uu][vv] = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? ibuf[(c*H + yy)*W + xx] : '0;
      end
    for (int k = 0; k < PAR_K; k++) begin
      bias[k] = bmem[g*PAR_K + k];
      krow[k] = kmem[((g*PAR_K + k)*C_IN + c)*N + int'(krow_idx)];
    end
  end

  assign e_valid = (state == S_SEND);

  fft_conv_engine #(.N(N), .PAR_K(PAR_K), .CORES(CORES)) u_eng (
    .clk, .rst_n, .in_valid(e_valid), .in_first(c == 0), .in_last(c == C_IN - 1),
    .x, .ready(e_ready), .krow_idx, .krow, .bias,
    .out_valid(e_out_valid), .out_k, .out_row, .out_data);

  assign busy    = (state != S_IDLE);
  assign rd_data = obuf[rd_addr];

  always_ff @(posedge clk) begin
    if (in_we) ibuf[in_addr] <= in_data;
    if (wt_we) kmem[wt_addr[31:LN]][wt_addr[LN-1:0]] <= wt_data;
    if (b_we)  bmem[b_addr] <= b_data;
    if (e_out_valid && int'(out_row) < H)
      for (int xx = 0; xx < W; xx++)
        obuf[((g*PAR_K + int'(out_k))*H + int'(out_row))*W + xx] <= out_data[xx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      g     <= 0;
      c     <= 0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          g     <= 0;
          c     <= 0;
          state <= S_SEND;
        end
        S_SEND: if (e_ready) state <= S_WAIT;   // engine takes the tile
        S_WAIT: if (e_ready) begin              // channel (and outputs) finished
          if (c < C_IN - 1) begin
            c     <= c + 1;
            state <= S_SEND;
          end else begin
            c <= 0;
            if (g < G - 1) begin
              g     <= g + 1;
              state <= S_SEND;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (H + K - 1 <= N && W + K - 1 <= N) else $error("fft_branch: map does not fit N");
    assert (C_OUT % PAR_K == 0) else $error("fft_branch: PAR_K must divide C_OUT");
  end
endmodule
