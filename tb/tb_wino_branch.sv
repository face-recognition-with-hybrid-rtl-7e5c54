// tb_wino_branch: Winograd F(4x4,3x3) branch, 2 -> 4 channels on a 6x6 map
// (edge tiles partly outside the map), PAR_K = 2. 3x3 kernels are multiples
// of 576 so that the transformed weights are exact and the output must
// equal a direct correlation bit for bit. Checks the busy cycle count.
module tb_wino_branch;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int CI = 2, CO = 4, H = 6, W = 6, PK = 2, M = 4, T = 6;

  logic        in_we, wt_we, b_we, start, busy, done;
  logic [31:0] in_addr, wt_addr, b_addr, rd_addr;
  data_t       in_data, wt_data, b_data, rd;

  wino_branch #(.C_IN(CI), .C_OUT(CO), .H(H), .W(W), .M(M), .PAR_K(PK)) dut (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .wt_we, .wt_addr, .wt_data, .b_we, .b_addr, .b_data,
    .start, .busy, .done, .rd_addr, .rd_data(rd));

  int map [CI][H][W];
  int g   [CO][CI][9];
  int bs  [CO];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int kind, input int a, input int v);
    @(negedge clk);
    {in_we, wt_we, b_we} = '0;
    if (kind == 0) begin in_we = 1; in_addr = a; in_data = data_t'(v); end
    if (kind == 1) begin wt_we = 1; wt_addr = a; wt_data = data_t'(v); end
    if (kind == 2) begin b_we = 1; b_addr = a; b_data = data_t'(v); end
  endtask

  initial begin
    int cyc;
    {in_we, wt_we, b_we, start} = '0;
    {in_addr, wt_addr, b_addr, rd_addr} = '0;
    {in_data, wt_data, b_data} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < CI; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          map[c][y][x] = srand(30);
          wr(0, (c*H + y)*W + x, map[c][y][x]);
        end
    for (int k = 0; k < CO; k++) begin
      bs[k] = srand(100);
      wr(2, k, bs[k]);
      for (int c = 0; c < CI; c++) begin
        for (int e = 0; e < 9; e++) g[k][c][e] = srand(2) * 576;
        for (int a = 0; a < T; a++)
          for (int b = 0; b < T; b++) wr(1, ((k*CI + c)*T + a)*T + b, wino_u(M, g[k][c], a, b));
      end
    end
    @(negedge clk);
    {in_we, wt_we, b_we} = '0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != (CO/PK) * 2 * 2 * CI + 1) begin
      failures++;
      $display("busy %0d cycles, expected %0d", cyc, (CO/PK) * 2 * 2 * CI + 1);
    end
    for (int k = 0; k < CO; k++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          automatic longint acc = 0;
          for (int c = 0; c < CI; c++)
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++) begin
                automatic int yy = y - 1 + i, xx = x - 1 + j;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W) acc += longint'(map[c][yy][xx]) * g[k][c][i*3+j];
              end
          rd_addr = (k*H + y)*W + x;
          #1;
          checks++;
          if (int'(rd) != requant_ref(acc, bs[k], FRAC)) begin
            failures++;
            if (failures < 6) $display("k=%0d (%0d,%0d) got %0d exp %0d", k, y, x, rd, requant_ref(acc, bs[k], FRAC));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
