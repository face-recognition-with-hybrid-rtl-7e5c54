// tb_winograd_pe: runs the Winograd engine (F(4x4,3x3) and F(2x2,3x3),
// PAR_K = 2) over several input channels and compares each output tile with
// a direct 3x3 correlation summed over channels, rounded and biased. The
// kernels are multiples of 576 (F(4,3)) or 4 (F(2,3)), so that U = G g G^T is
// exactly representable and the result must match bit for bit. Also checks
// the one-cycle output latency.
module tb_winograd_pe;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int PK = 2;
  localparam int C  = 5;

  logic  v4, f4, l4, ov4;
  data_t d4 [6][6];
  data_t u4 [PK][6][6];
  data_t b4 [PK];
  data_t y4 [PK][4][4];
  logic  v2, f2, l2, ov2;
  data_t d2 [4][4];
  data_t u2 [PK][4][4];
  data_t b2 [PK];
  data_t y2 [PK][2][2];

  winograd_pe #(.M(4), .PAR_K(PK)) dut4 (.clk, .rst_n, .in_valid(v4), .in_first(f4), .in_last(l4),
    .d(d4), .u(u4), .bias(b4), .out_valid(ov4), .y(y4));
  winograd_pe #(.M(2), .PAR_K(PK)) dut2 (.clk, .rst_n, .in_valid(v2), .in_first(f2), .in_last(l2),
    .d(d2), .u(u2), .bias(b2), .out_valid(ov2), .y(y2));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tile [C][6][6];
  int g    [C][PK][9];

  task automatic run(input int m);
    int t = m + 2;
    int lat;
    for (int c = 0; c < C; c++) begin
      for (int i = 0; i < t; i++) for (int j = 0; j < t; j++) tile[c][i][j] = srand(40);
      for (int k = 0; k < PK; k++)
        for (int e = 0; e < 9; e++) g[c][k][e] = srand(2) * ((m == 4) ? 576 : 4);
    end
    for (int k = 0; k < PK; k++) begin
      b4[k] = data_t'(srand(100));
      b2[k] = b4[k];
    end
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      for (int i = 0; i < t; i++)
        for (int j = 0; j < t; j++) begin
          if (m == 4) d4[i][j] = data_t'(tile[c][i][j]);
          else d2[i][j] = data_t'(tile[c][i][j]);
          for (int k = 0; k < PK; k++)
            if (m == 4) u4[k][i][j] = data_t'(wino_u(4, g[c][k], i, j));
            else u2[k][i][j] = data_t'(wino_u(2, g[c][k], i, j));
        end
      if (m == 4) {v4, f4, l4} = {1'b1, c == 0, c == C - 1};
      else {v2, f2, l2} = {1'b1, c == 0, c == C - 1};
    end
    @(negedge clk);
    {v4, v2} = 2'b00;
    // out_valid must be high exactly now: one cycle after the last beat
    lat = 0;
    checks++;
    if (!((m == 4) ? ov4 : ov2)) begin
      failures++;
      $display("output not valid one cycle after last beat (M=%0d)", m);
    end
    for (int k = 0; k < PK; k++)
      for (int oy = 0; oy < m; oy++)
        for (int ox = 0; ox < m; ox++) begin
          longint acc = 0;
          int e, got;
          for (int c = 0; c < C; c++)
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++) acc += longint'(tile[c][oy+i][ox+j]) * g[c][k][i*3+j];
          e   = requant_ref(acc, (m == 4) ? b4[k] : b2[k], FRAC);
          got = (m == 4) ? y4[k][oy][ox] : y2[k][oy][ox];
          checks++;
          if (got != e) begin
            failures++;
            if (failures < 6) $display("M=%0d k=%0d (%0d,%0d): got %0d exp %0d", m, k, oy, ox, got, e);
          end
        end
  endtask

  initial begin
    {v4, f4, l4, v2, f2, l2} = '0;
    for (int k = 0; k < PK; k++) begin
      b4[k] = '0;
      b2[k] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      run(4);
      run(2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
