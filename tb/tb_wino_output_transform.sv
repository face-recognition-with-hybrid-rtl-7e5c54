// tb_wino_output_transform: checks Y = A^T x A for F(4x4,3x3) and
// F(2x2,3x3) against matrices written out here, on random tiles.
module tb_wino_output_transform;
  import hec_pkg::*;
  int checks = 0, failures = 0;

  acc_t x4 [6][6];
  acc_t y4 [4][4];
  acc_t x2 [4][4];
  acc_t y2 [2][2];

  wino_output_transform #(.M(4)) dut4 (.x(x4), .y(y4));
  wino_output_transform #(.M(2)) dut2 (.x(x2), .y(y2));

  int at4 [4][6] = '{'{1, 1, 1, 1, 1, 0}, '{0, 1, -1, 2, -2, 0}, '{0, 1, 1, 4, 4, 0},
                     '{0, 1, -1, 8, -8, 1}};
  int at2 [2][4] = '{'{1, 1, 1, 0}, '{0, 1, -1, -1}};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) x4[i][j] = acc_t'($signed($urandom));
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) x2[i][j] = acc_t'($signed($urandom));
      #1;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          automatic longint e = 0;
          for (int k = 0; k < 6; k++)
            for (int l = 0; l < 6; l++) e += longint'(at4[i][k]) * x4[k][l] * at4[j][l];
          checks++;
          if (y4[i][j] != acc_t'(e)) begin
            failures++;
            if (failures < 5) $display("M4 Y[%0d][%0d]=%0d exp %0d", i, j, y4[i][j], e);
          end
        end
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          automatic longint e = 0;
          for (int k = 0; k < 4; k++)
            for (int l = 0; l < 4; l++) e += longint'(at2[i][k]) * x2[k][l] * at2[j][l];
          checks++;
          if (y2[i][j] != acc_t'(e)) begin
            failures++;
            if (failures < 5) $display("M2 Y[%0d][%0d]=%0d exp %0d", i, j, y2[i][j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
