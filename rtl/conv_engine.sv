// conv_engine: conventional convolution MAC array, used for the 1x1 (cccp)
// branch and for the 3x3/5x5 branches the paper leaves "conventional"
// (Table 4), e.g. the stride-2 convolutions the fast algorithms cannot do.
//
// Each cycle it takes one K x K input window of one input channel and the
// matching K x K weights of PAR_K output channels, and adds the K*K*PAR_K
// products to PAR_K running sums (output-channel unrolling, in the spirit of
// the loop-optimised baseline the paper builds on). in_first restarts the
// sums, in_last ends them: one cycle after an in_last beat, out_valid is high
// and y holds the PAR_K outputs, rounded, biased and saturated. The unroll
// shape (window x PAR_K per cycle) is this design's choice; the paper says
// only that the baseline is a loop-optimised convolution.
module conv_engine
  import hec_pkg::*;
#(
  parameter int K     = 3,
  parameter int PAR_K = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  data_t win  [K][K],
  input  data_t w    [PAR_K][K][K],
  input  data_t bias [PAR_K],
  output logic  out_valid,
  output data_t y    [PAR_K]
);
  acc_t acc_q [PAR_K];
  acc_t acc_d [PAR_K];

  always_comb begin
    for (int k = 0; k < PAR_K; k++) begin
      acc_d[k] = in_first ? acc_t'(0) : acc_q[k];
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          acc_d[k] = acc_d[k] + acc_t'(win[i][j]) * acc_t'(w[k][i][j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < PAR_K; k++) begin
        acc_q[k] <= '0;
        y[k]     <= '0;
      end
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc_q <= acc_d;
        if (in_last)
          for (int k = 0; k < PAR_K; k++) y[k] <= requant(acc_d[k], bias[k]);
      end
    end
  end
endmodule
