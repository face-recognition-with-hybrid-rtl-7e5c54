// pool_unit: K x K max pooling of one window per cycle, for the pooling
// branch of the Inception module. Out-of-map positions of the window are to
// be filled by the caller with the most negative value. One cycle latency:
// out_valid and y follow an in_valid beat by one clock.
// The paper says only "pooling"; max pooling (GoogLeNet's 3x3 pool) is this
// design's choice.
module pool_unit
  import hec_pkg::*;
#(
  parameter int K = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t win [K][K],
  output logic  out_valid,
  output data_t y
);
  data_t m;

  always_comb begin
    m = DATA_MIN;
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        if (win[i][j] > m) m = win[i][j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= m;
    end
  end
endmodule
