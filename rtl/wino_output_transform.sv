// wino_output_transform: Winograd output transform Y = A^T X A of
// F(m x m, 3 x 3), from an (m+2) x (m+2) tile of accumulated element-wise
// products to an m x m output tile (the second "Winograd Transform Matrix" of
// the paper's Winograd engine figure).
//
// Purely combinational and exact: A^T is integer (hec_pkg::wino_at), with
// constants 1, 2, 4 and 8 only.
module wino_output_transform
  import hec_pkg::*;
#(
  parameter int M = 4
) (
  input  acc_t x [M+2][M+2],
  output acc_t y [M][M]
);
  localparam int T = M + 2;

  acc_t t [M][T];   // A^T x

  always_comb begin
    for (int i = 0; i < M; i++)
      for (int j = 0; j < T; j++) begin
        t[i][j] = '0;
        for (int k = 0; k < T; k++)
          t[i][j] = t[i][j] + acc_t'(wino_at(M, i, k)) * x[k][j];
      end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < M; j++) begin
        y[i][j] = '0;
        for (int k = 0; k < T; k++)
          y[i][j] = y[i][j] + t[i][k] * acc_t'(wino_at(M, j, k));
      end
  end
endmodule
