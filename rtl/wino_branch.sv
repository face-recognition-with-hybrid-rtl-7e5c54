// wino_branch: the 3x3 Inception branch computed with Winograd
// F(M x M, 3 x 3) on a winograd_pe (Table 4: F(4x4,3x3) in the earlier
// modules, F(2x2,3x3) in the later ones; M selects which).
//
// Like the other branches it owns its input copy, its pre-transformed
// weights U = G g G^T (computed offline, Q.FRAC), its biases and its output
// buffer. It walks output-channel groups of PAR_K, output tiles (row-major)
// and input channels, and hands the engine one (M+2)x(M+2) input tile (with
// one pixel of zero padding around the map) per cycle without stalls: busy
// is high for (C_OUT/PAR_K) * ceil(H/M) * ceil(W/M) * C_IN + 1 cycles. Output
// pixels of edge tiles that fall outside the map are dropped. Stride 1 only:
// the paper notes the fast algorithms do not support stride 2.
//
// Memory layouts (flat word addresses):
//   input   (c*H + y)*W + x
//   weights ((k*C_IN + c)*(M+2) + a)*(M+2) + b   (U in Q.FRAC)
//   bias    k
//   output  (k*H + y)*W + x
module wino_branch
  import hec_pkg::*;
#(
  parameter int C_IN  = 16,
  parameter int C_OUT = 16,
  parameter int H     = 24,
  parameter int W     = 24,
  parameter int M     = 4,
  parameter int PAR_K = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_we,
  input  logic [31:0] in_addr,
  input  data_t       in_data,
  input  logic        wt_we,
  input  logic [31:0] wt_addr,
  input  data_t       wt_data,
  input  logic        b_we,
  input  logic [31:0] b_addr,
  input  data_t       b_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic [31:0] rd_addr,
  output data_t       rd_data
);
  localparam int T  = M + 2;
  localparam int TY = (H + M - 1) / M;
  localparam int TX = (W + M - 1) / M;
  localparam int G  = C_OUT / PAR_K;

  data_t ibuf [C_IN*H*W];
  data_t umem [C_OUT*C_IN*T*T];
  data_t bmem [C_OUT];
  data_t obuf [C_OUT*H*W];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;
  int     g, ty, tx, c;
  int     g_q, ty_q, tx_q;

  data_t d    [T][T];
  data_t u    [PAR_K][T][T];
  data_t bias [PAR_K];
  logic  e_valid, e_out_valid;
  data_t e_y  [PAR_K][M][M];

  always_comb begin
    for (int a = 0; a < T; a++)
      for (int b = 0; b < T; b++) begin
        int yy, xx;
        yy = ty * M - 1 + a;
        xx = tx * M - 1 + b;
        d[a][b] = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? ibuf[(c*H + yy)*W + xx] : '0;
      end
    for (int k = 0; k < PAR_K; k++) begin
      bias[k] = bmem[g*PAR_K + k];
      for (int a = 0; a < T; a++)
        for (int b = 0; b < T; b++)
          u[k][a][b] = umem[(((g*PAR_K + k)*C_IN + c)*T + a)*T + b];
    end
  end

  assign e_valid = (state == S_RUN);

  winograd_pe #(.M(M), .PAR_K(PAR_K)) u_pe (
    .clk, .rst_n, .in_valid(e_valid), .in_first(c == 0), .in_last(c == C_IN - 1),
    .d, .u, .bias, .out_valid(e_out_valid), .y(e_y));

  assign busy    = (state != S_IDLE);
  assign rd_data = obuf[rd_addr];

  always_ff @(posedge clk) begin
    if (in_we) ibuf[in_addr] <= in_data;
    if (wt_we) umem[wt_addr] <= wt_data;
    if (b_we)  bmem[b_addr]  <= b_data;
    if (e_out_valid)
      for (int k = 0; k < PAR_K; k++)
        for (int a = 0; a < M; a++)
          for (int b = 0; b < M; b++)
            if (ty_q*M + a < H && tx_q*M + b < W)
              obuf[((g_q*PAR_K + k)*H + ty_q*M + a)*W + tx_q*M + b] <= e_y[k][a][b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      {g, ty, tx, c}    <= '0;
      {g_q, ty_q, tx_q} <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          {g, ty, tx, c} <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          g_q  <= g;
          ty_q <= ty;
          tx_q <= tx;
          if (c < C_IN - 1) c <= c + 1;
          else begin
            c <= 0;
            if (tx < TX - 1) tx <= tx + 1;
            else begin
              tx <= 0;
              if (ty < TY - 1) ty <= ty + 1;
              else begin
                ty <= 0;
                if (g < G - 1) g <= g + 1;
                else state <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (C_OUT % PAR_K == 0) else $error("wino_branch: PAR_K must divide C_OUT");
endmodule
