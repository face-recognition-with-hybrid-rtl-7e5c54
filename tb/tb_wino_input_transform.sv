// tb_wino_input_transform: checks V = B^T d B for F(4x4,3x3) and F(2x2,3x3)
// against matrices written out here, on random tiles.
module tb_wino_input_transform;
  import hec_pkg::*;
  int checks = 0, failures = 0;

  data_t d4 [6][6];
  acc_t  v4 [6][6];
  data_t d2 [4][4];
  acc_t  v2 [4][4];

  wino_input_transform #(.M(4)) dut4 (.d(d4), .v(v4));
  wino_input_transform #(.M(2)) dut2 (.d(d2), .v(v2));

  int bt4 [6][6] = '{'{4, 0, -5, 0, 1, 0}, '{0, -4, -4, 1, 1, 0}, '{0, 4, -4, -1, 1, 0},
                     '{0, -2, -1, 2, 1, 0}, '{0, 2, -1, -2, 1, 0}, '{0, 4, 0, -5, 0, 1}};
  int bt2 [4][4] = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) d4[i][j] = data_t'($urandom);
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) d2[i][j] = data_t'($urandom);
      #1;
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 6; j++) begin
          automatic longint e = 0;
          for (int k = 0; k < 6; k++)
            for (int l = 0; l < 6; l++) e += longint'(bt4[i][k]) * d4[k][l] * bt4[j][l];
          checks++;
          if (v4[i][j] != acc_t'(e)) begin
            failures++;
            if (failures < 5) $display("M4 V[%0d][%0d]=%0d exp %0d", i, j, v4[i][j], e);
          end
        end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          automatic longint e = 0;
          for (int k = 0; k < 4; k++)
            for (int l = 0; l < 4; l++) e += longint'(bt2[i][k]) * d2[k][l] * bt2[j][l];
          checks++;
          if (v2[i][j] != acc_t'(e)) begin
            failures++;
            if (failures < 5) $display("M2 V[%0d][%0d]=%0d exp %0d", i, j, v2[i][j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
