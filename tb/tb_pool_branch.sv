// tb_pool_branch: 3x3 max pooling branch, 2 channels on a 5x4 map: compares
// every output with the maximum of its (clipped) window and checks the busy
// cycle count.
module tb_pool_branch;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int C = 2, H = 5, W = 4;
  logic        in_we, start, busy, done;
  logic [31:0] in_addr, rd_addr;
  data_t       in_data, rd;

  pool_branch #(.C(C), .H(H), .W(W)) dut (.clk, .rst_n, .in_we, .in_addr, .in_data, .start, .busy,
    .done, .rd_addr, .rd_data(rd));

  int map [C][H][W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    {in_we, start} = '0;
    {in_addr, rd_addr} = '0;
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          map[c][y][x] = srand(30000);
          {in_we, in_addr, in_data} = {1'b1, 32'((c*H + y)*W + x), data_t'(map[c][y][x])};
        end
    @(negedge clk);
    in_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != C*H*W + 1) begin
      failures++;
      $display("busy %0d cycles, expected %0d", cyc, C*H*W + 1);
    end
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          automatic int e = -32768;
          for (int i = -1; i <= 1; i++)
            for (int j = -1; j <= 1; j++)
              if (y+i >= 0 && y+i < H && x+j >= 0 && x+j < W && map[c][y+i][x+j] > e) e = map[c][y+i][x+j];
          rd_addr = (c*H + y)*W + x;
          #1;
          checks++;
          if (int'(rd) != e) begin
            failures++;
            if (failures < 6) $display("c=%0d (%0d,%0d) got %0d exp %0d", c, y, x, rd, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
