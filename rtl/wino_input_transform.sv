// wino_input_transform: Winograd input (feature-map) transform V = B^T d B of
// F(m x m, 3 x 3) for one (m+2) x (m+2) input tile (the first "Winograd
// Transform Matrix" of the paper's Winograd engine figure).
//
// Purely combinational. B^T is integer (see hec_pkg::wino_bt), so each output
// is a sum of constant multiples of the inputs; a synthesiser turns the small
// constants (1, 2, 4, 5) into shifts and adds. The result is exact; it is
// carried at accumulator width so nothing can overflow.
// Parameter M selects the output tile size: 2 for F(2x2,3x3), 4 for
// F(4x4,3x3), the two variants the paper uses (Table 4).
module wino_input_transform
  import hec_pkg::*;
#(
  parameter int M = 4
) (
  input  data_t d [M+2][M+2],
  output acc_t  v [M+2][M+2]
);
  localparam int T = M + 2;

  acc_t t [T][T];   // B^T d

  always_comb begin
    for (int i = 0; i < T; i++)
      for (int j = 0; j < T; j++) begin
        t[i][j] = '0;
        for (int k = 0; k < T; k++)
          t[i][j] = t[i][j] + acc_t'(wino_bt(M, i, k)) * acc_t'(d[k][j]);
      end
    for (int i = 0; i < T; i++)
      for (int j = 0; j < T; j++) begin
        v[i][j] = '0;
        for (int k = 0; k < T; k++)
          v[i][j] = v[i][j] + t[i][k] * acc_t'(wino_bt(M, j, k));
      end
  end
endmodule
