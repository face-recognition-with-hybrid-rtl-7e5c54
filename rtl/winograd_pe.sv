// winograd_pe: Winograd processing engine (the paper's Winograd engine
// figure): input tile -> input transform -> array of element-wise
// multipliers against pre-transformed weights -> output transform -> output
// tiles.
//
// One transformed input tile V is reused by PAR_K kernels at once (the
// paper's "feature map reuse factor", set by unrolling). Products U (.) V are
// summed over input channels in the transformed domain, so the output
// transform runs once per output tile, on the last input channel, rather
// than once per channel: that accumulation is this design's choice, the
// paper's figure shows the multipliers feeding the output transform.
//
// Interface: one input channel per cycle. When in_valid is high the engine
// takes tile d (input channel c of one (M+2)x(M+2) input tile), the PAR_K
// pre-transformed kernels u (U = G g G^T in Q.FRAC, computed offline) and
// flags in_first (c is the first channel: restart the sums) and in_last (c
// is the last: produce output). One cycle after a beat with in_last, out_valid
// is high for one cycle and y holds PAR_K output tiles, rounded, biased and
// saturated to 16 bits. Throughput: one tile-channel per cycle, no stalls.
module winograd_pe
  import hec_pkg::*;
#(
  parameter int M     = 4,   // output tile size m of F(m x m, 3 x 3)
  parameter int PAR_K = 4    // kernels processed in parallel
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  data_t d    [M+2][M+2],
  input  data_t u    [PAR_K][M+2][M+2],
  input  data_t bias [PAR_K],
  output logic  out_valid,
  output data_t y    [PAR_K][M][M]
);
  localparam int T = M + 2;

  acc_t v     [T][T];
  acc_t acc_q [PAR_K][T][T];
  acc_t acc_d [PAR_K][T][T];
  acc_t yt    [PAR_K][M][M];

  wino_input_transform #(.M(M)) u_bt (.d(d), .v(v));

  // MAC array: PAR_K x T x T multipliers.
  always_comb begin
    for (int k = 0; k < PAR_K; k++)
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++)
          acc_d[k][i][j] = (in_first ? acc_t'(0) : acc_q[k][i][j])
                         + acc_t'(u[k][i][j]) * v[i][j];
  end

  for (genvar k = 0; k < PAR_K; k++) begin : g_at
    wino_output_transform #(.M(M)) u_at (.x(acc_d[k]), .y(yt[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < PAR_K; k++) begin
        for (int i = 0; i < T; i++)
          for (int j = 0; j < T; j++) acc_q[k][i][j] <= '0;
        for (int i = 0; i < M; i++)
          for (int j = 0; j < M; j++) y[k][i][j] <= '0;
      end
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc_q <= acc_d;
        if (in_last)
          for (int k = 0; k < PAR_K; k++)
            for (int i = 0; i < M; i++)
              for (int j = 0; j < M; j++) y[k][i][j] <= requant(yt[k][i][j], bias[k]);
      end
    end
  end

  initial assert (M == 2 || M == 4) else $error("winograd_pe: M must be 2 or 4");
endmodule
