// pool_branch: the pooling branch of the Inception module: K x K max pooling
// (stride STRIDE, "same" padding with the most negative value) of every
// input channel, on a pool_unit, one output pixel per cycle. It owns its
// input copy and output buffer like the convolution branches and is
// busy for C*HO*WO + 1 cycles. Max pooling and the 3x3 default are this design's
// choice; the paper names only a "pool" branch.
//
// Memory layouts: input (c*H + y)*W + x, output (c*HO + y)*WO + x.
module pool_branch
  import hec_pkg::*;
#(
  parameter int C      = 16,
  parameter int H      = 24,
  parameter int W      = 24,
  parameter int K      = 3,
  parameter int STRIDE = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_we,
  input  logic [31:0] in_addr,
  input  data_t       in_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic [31:0] rd_addr,
  output data_t       rd_data
);
  localparam int P  = K / 2;
  localparam int HO = (H + 2 * P - K) / STRIDE + 1;
  localparam int WO = (W + 2 * P - K) / STRIDE + 1;

  data_t ibuf [C*H*W];
  data_t obuf [C*HO*WO];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;
  int     c, oy, ox;
  int     wr_q;

  data_t win [K][K];
  logic  p_valid;
  data_t p_y;

  always_comb begin
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        int yy, xx;
        yy = oy * STRIDE - P + i;
        xx = ox * STRIDE - P + j;
        win[i][j] = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? ibuf[(c*H + yy)*W + xx] : DATA_MIN;
      end
  end

  pool_unit #(.K(K)) u_pool (.clk, .rst_n, .in_valid(state == S_RUN), .win,
                             .out_valid(p_valid), .y(p_y));

  assign busy    = (state != S_IDLE);
  assign rd_data = obuf[rd_addr];

  always_ff @(posedge clk) begin
    if (in_we)   ibuf[in_addr] <= in_data;
    if (p_valid) obuf[wr_q]    <= p_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      {c, oy, ox} <= '0;
      wr_q  <= 0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          {c, oy, ox} <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          wr_q <= (c*HO + oy)*WO + ox;
          if (ox < WO - 1) ox <= ox + 1;
          else begin
            ox <= 0;
            if (oy < HO - 1) oy <= oy + 1;
            else begin
              oy <= 0;
              if (c < C - 1) c <= c + 1;
              else state <= S_DRAIN;
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
endmodule
