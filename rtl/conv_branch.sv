// conv_branch: one Inception branch computed by conventional convolution
// (conv_engine): the 1x1 "cccp" branch, or a 3x3/5x5 branch the paper leaves
// conventional (Table 4: Inception 3a's 5x5, the stride-2 modules 3c/4e).
//
// The branch owns its copy of the input feature map (written by
// split_input), its weights and biases, and its own output buffer, so it
// can run concurrently with the other branches (the paper's reason for
// split_input/combine_output). After start it walks output-channel groups of
// PAR_K, output rows, output columns and input channels, innermost last,
// and issues one window per cycle to the engine without stalls: busy is
// high for (C_OUT/PAR_K)*HO*WO*C_IN + 1 cycles. done pulses once the last
// output is in the output buffer. "Same" zero padding of K/2.
//
// Memory layouts (flat word addresses):
//   input   (c*H + y)*W + x
//   weights ((k*C_IN + c)*K + i)*K + j   (Q.FRAC)
//   bias    k
//   output  (k*HO + y)*WO + x
module conv_branch
  import hec_pkg::*;
#(
  parameter int C_IN   = 16,
  parameter int C_OUT  = 16,
  parameter int H      = 24,
  parameter int W      = 24,
  parameter int K      = 1,
  parameter int STRIDE = 1,
  parameter int PAR_K  = 4
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
  localparam int P  = K / 2;
  localparam int HO = (H + 2 * P - K) / STRIDE + 1;
  localparam int WO = (W + 2 * P - K) / STRIDE + 1;
  localparam int G  = C_OUT / PAR_K;

  data_t ibuf [C_IN*H*W];
  data_t wmem [C_OUT*C_IN*K*K];
  data_t bmem [C_OUT];
  data_t obuf [C_OUT*HO*WO];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;
  int     g, oy, ox, c;        // loop counters
  int     g_q, oy_q, ox_q;     // position of the output in flight

  data_t win  [K][K];
  data_t w    [PAR_K][K][K];
  data_t bias [PAR_K];
  logic  e_valid, e_out_valid;
  data_t e_y  [PAR_K];

  always_comb begin
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        int yy, xx;
        yy = oy * STRIDE - P + i;
        xx = ox * STRIDE - P + j;
        win[i][j] = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? ibuf[(c*H + yy)*W + xx] : '0;
      end
    for (int k = 0; k < PAR_K; k++) begin
      bias[k] = bmem[g*PAR_K + k];
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          w[k][i][j] = wmem[(((g*PAR_K + k)*C_IN + c)*K + i)*K + j];
    end
  end

  assign e_valid = (state == S_RUN);

  conv_engine #(.K(K), .PAR_K(PAR_K)) u_eng (
    .clk, .rst_n, .in_valid(e_valid), .in_first(c == 0), .in_last(c == C_IN - 1),
    .win, .w, .bias, .out_valid(e_out_valid), .y(e_y));

  assign busy    = (state != S_IDLE);
  assign rd_data = obuf[rd_addr];

  always_ff @(posedge clk) begin
    if (in_we) ibuf[in_addr] <= in_data;
    if (wt_we) wmem[wt_addr] <= wt_data;
    if (b_we)  bmem[b_addr]  <= b_data;
    if (e_out_valid)
      for (int k = 0; k < PAR_K; k++) obuf[((g_q*PAR_K + k)*HO + oy_q)*WO + ox_q] <= e_y[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      {g, oy, ox, c}    <= '0;
      {g_q, oy_q, ox_q} <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          {g, oy, ox, c} <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          g_q  <= g;
          oy_q <= oy;
          ox_q <= ox;
          if (c < C_IN - 1) c <= c + 1;
          else begin
            c <= 0;
            if (ox < WO - 1) ox <= ox + 1;
            else begin
              ox <= 0;
              if (oy < HO - 1) oy <= oy + 1;
              else begin
                oy <= 0;
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

  initial assert (C_OUT % PAR_K == 0) else $error("conv_branch: PAR_K must divide C_OUT");
endmodule
