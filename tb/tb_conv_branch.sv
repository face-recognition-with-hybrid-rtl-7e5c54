// tb_conv_branch: a 3x3, stride-2 conventional branch (3 -> 4 channels on a
// 5x6 map, PAR_K = 2) and a 1x1 branch: loads map, weights and biases
// through the write ports, runs it, and compares every output word with a
// direct convolution. Checks the cycle count G*HO*WO*C_IN + 1 (busy).
module tb_conv_branch;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int CI = 3, CO = 4, H = 5, W = 6, PK = 2;

  logic        in_we, wt_we, wt_we1, b_we, start;
  logic [31:0] in_addr, wt_addr, b_addr, rd_addr;
  data_t       in_data, wt_data, b_data;
  logic        busy3, done3, busy1, done1;
  data_t       rd3, rd1;

  conv_branch #(.C_IN(CI), .C_OUT(CO), .H(H), .W(W), .K(3), .STRIDE(2), .PAR_K(PK)) dut3 (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .wt_we, .wt_addr, .wt_data, .b_we, .b_addr, .b_data,
    .start, .busy(busy3), .done(done3), .rd_addr, .rd_data(rd3));
  conv_branch #(.C_IN(CI), .C_OUT(CO), .H(H), .W(W), .K(1), .STRIDE(1), .PAR_K(PK)) dut1 (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .wt_we(wt_we1), .wt_addr, .wt_data, .b_we, .b_addr, .b_data,
    .start, .busy(busy1), .done(done1), .rd_addr, .rd_data(rd1));

  int map [CI][H][W];
  int w3 [CO][CI][3][3];
  int w1 [CO][CI];
  int bs [CO];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int kind, input int a, input int v);
    @(negedge clk);
    {in_we, wt_we, wt_we1, b_we} = '0;
    if (kind == 3) begin wt_we1 = 1; wt_addr = a; wt_data = data_t'(v); end
    if (kind == 0) begin in_we = 1; in_addr = a; in_data = data_t'(v); end
    if (kind == 1) begin wt_we = 1; wt_addr = a; wt_data = data_t'(v); end
    if (kind == 2) begin b_we = 1; b_addr = a; b_data = data_t'(v); end
  endtask

  initial begin
    int cyc1, cyc3;
    {in_we, wt_we, wt_we1, b_we, start} = '0;
    {in_addr, wt_addr, b_addr, rd_addr} = '0;
    {in_data, wt_data, b_data} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < CI; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          map[c][y][x] = srand(300);
          wr(0, (c*H + y)*W + x, map[c][y][x]);
        end
    // 3x3 weights first (both branches see the writes, the 1x1 one keeps the
    // first CO*CI words and is rewritten below)
    for (int k = 0; k < CO; k++) begin
      bs[k] = srand(100);
      wr(2, k, bs[k]);
      for (int c = 0; c < CI; c++)
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            w3[k][c][i][j] = srand(200);
            wr(1, ((k*CI + c)*3 + i)*3 + j, w3[k][c][i][j]);
          end
    end
    for (int k = 0; k < CO; k++)
      for (int c = 0; c < CI; c++) begin
        w1[k][c] = srand(200);
        wr(3, k*CI + c, w1[k][c]);
      end
    @(negedge clk);
    {in_we, wt_we, wt_we1, b_we} = '0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc1 = 1;
    cyc3 = 1;
    while (!(done1 && done3) && !(busy1 == 0 && busy3 == 0)) begin
      @(negedge clk);
      if (busy1 || done1) cyc1 += busy1 ? 1 : 0;
      if (busy3) cyc3++;
    end
    while (busy1 || busy3) begin
      @(negedge clk);
      if (busy1) cyc1++;
      if (busy3) cyc3++;
    end
    checks++;
    if (cyc3 != (CO/PK)*3*3*CI + 1) begin
      failures++;
      $display("3x3 branch busy %0d cycles, expected %0d", cyc3, (CO/PK)*3*3*CI + 1);
    end
    checks++;
    if (cyc1 != (CO/PK)*H*W*CI + 1) begin
      failures++;
      $display("1x1 branch busy %0d cycles, expected %0d", cyc1, (CO/PK)*H*W*CI + 1);
    end
    // stride 2, pad 1: 3 x 3 outputs
    for (int k = 0; k < CO; k++)
      for (int y = 0; y < 3; y++)
        for (int x = 0; x < 3; x++) begin
          automatic longint acc = 0;
          for (int c = 0; c < CI; c++)
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++) begin
                automatic int yy = 2*y - 1 + i, xx = 2*x - 1 + j;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W) acc += longint'(map[c][yy][xx]) * w3[k][c][i][j];
              end
          rd_addr = (k*3 + y)*3 + x;
          #1;
          checks++;
          if (int'(rd3) != requant_ref(acc, bs[k], FRAC)) begin
            failures++;
            if (failures < 6) $display("3x3 k=%0d (%0d,%0d) got %0d exp %0d", k, y, x, rd3, requant_ref(acc, bs[k], FRAC));
          end
        end
    for (int k = 0; k < CO; k++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          automatic longint acc = 0;
          for (int c = 0; c < CI; c++) acc += longint'(map[c][y][x]) * w1[k][c];
          rd_addr = (k*H + y)*W + x;
          #1;
          checks++;
          if (int'(rd1) != requant_ref(acc, bs[k], FRAC)) begin
            failures++;
            if (failures < 6) $display("1x1 k=%0d (%0d,%0d) got %0d exp %0d", k, y, x, rd1, requant_ref(acc, bs[k], FRAC));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
