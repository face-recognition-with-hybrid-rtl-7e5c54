// fft2d: 2D FFT engine built from 1D FFT cores, as in the paper's FFT engine
// figure: a "1D FFT Array (Row)", a "Transpose Matrix" and a "1D FFT Array
// (Column)".
//
// The row array has CORES fft1d cores and transforms CORES rows per cycle,
// writing them into the transpose matrix tm. The column array (another CORES
// cores) then reads CORES columns of tm per cycle and writes their transforms
// back into the same columns, so that at the end tm holds the 2D transform.
// A transform takes 2*N/CORES + 1 cycles: done pulses for one cycle, 2*N/CORES + 1
// clock edges after the one that samples start, with the last column write; and the result stays in tm until the next
// start. inv selects forward or inverse transform (see fft1d) and must be
// held, with x, for the whole transform. The number of cores per array is
// not given by the paper (its figure shows an array of unstated length); the
// default of 4 is this design's choice.
module fft2d
  import hec_pkg::*;
#(
  parameter int N     = 32,
  parameter int W     = 40,
  parameter int CORES = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                inv,
  input  logic signed [W-1:0] x_re [N][N],
  input  logic signed [W-1:0] x_im [N][N],
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] tm_re [N][N],
  output logic signed [W-1:0] tm_im [N][N]
);
  localparam int STEPS = N / CORES;
  localparam int SW    = (STEPS > 1) ? $clog2(STEPS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ROW, S_COL} state_e;
  state_e        state;
  logic [SW-1:0] step;

  typedef logic signed [W-1:0] word_t;
  word_t ri_re [CORES][N], ri_im [CORES][N], ro_re [CORES][N], ro_im [CORES][N];
  word_t ci_re [CORES][N], ci_im [CORES][N], co_re [CORES][N], co_im [CORES][N];

  for (genvar c = 0; c < CORES; c++) begin : g_core
    always_comb begin
      for (int n = 0; n < N; n++) begin
        ri_re[c][n] = x_re[int'(step) * CORES + c][n];
        ri_im[c][n] = x_im[int'(step) * CORES + c][n];
        ci_re[c][n] = tm_re[n][int'(step) * CORES + c];
        ci_im[c][n] = tm_im[n][int'(step) * CORES + c];
      end
    end
    fft1d #(.N(N), .W(W)) u_row (.inv(inv), .x_re(ri_re[c]), .x_im(ri_im[c]),
                                 .y_re(ro_re[c]), .y_im(ro_im[c]));
    fft1d #(.N(N), .W(W)) u_col (.inv(inv), .x_re(ci_re[c]), .x_im(ci_im[c]),
                                 .y_re(co_re[c]), .y_im(co_im[c]));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      done  <= 1'b0;
      for (int r = 0; r < N; r++)
        for (int n = 0; n < N; n++) begin
          tm_re[r][n] <= '0;
          tm_im[r][n] <= '0;
        end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ROW;
          step  <= '0;
        end
        S_ROW: begin
          for (int c = 0; c < CORES; c++)
            for (int n = 0; n < N; n++) begin
              tm_re[int'(step) * CORES + c][n] <= ro_re[c][n];
              tm_im[int'(step) * CORES + c][n] <= ro_im[c][n];
            end
          if (int'(step) == STEPS - 1) begin
            state <= S_COL;
            step  <= '0;
          end else step <= step + 1'b1;
        end
        S_COL: begin
          for (int c = 0; c < CORES; c++)
            for (int n = 0; n < N; n++) begin
              tm_re[n][int'(step) * CORES + c] <= co_re[c][n];
              tm_im[n][int'(step) * CORES + c] <= co_im[c][n];
            end
          if (int'(step) == STEPS - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else step <= step + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (N % CORES == 0) else $error("fft2d: CORES must divide N");
endmodule
