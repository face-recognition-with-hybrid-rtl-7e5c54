// tb_fft_branch: FFT-based 5x5 branch, 2 -> 4 channels on a 4x4 map with an
// 8-point FFT, PAR_K = 2. Kernel spectra are computed here from random
// spatial kernels; every output must be within 3 LSB of a direct
// correlation. Checks that each output group is produced (done) and that
// all outputs are written.
module tb_fft_branch;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int CI = 2, CO = 4, H = 4, W = 4, PK = 2, N = 8, K = 5, P = 2;

  logic        in_we, wt_we, b_we, start, busy, done;
  logic [31:0] in_addr, wt_addr, b_addr, rd_addr;
  data_t       in_data, b_data, rd;
  cdata_t      wt_data;

  fft_branch #(.C_IN(CI), .C_OUT(CO), .H(H), .W(W), .K(K), .N(N), .PAR_K(PK), .CORES(2)) dut (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .wt_we, .wt_addr, .wt_data, .b_we, .b_addr, .b_data,
    .start, .busy, .done, .rd_addr, .rd_data(rd));

  int map [CI][H][W];
  int g   [CO][CI][];
  int bs  [CO];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int kind, input int a, input logic [31:0] v);
    @(negedge clk);
    {in_we, wt_we, b_we} = '0;
    if (kind == 0) begin in_we = 1; in_addr = a; in_data = data_t'(v); end
    if (kind == 1) begin wt_we = 1; wt_addr = a; wt_data = cdata_t'(v); end
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
          map[c][y][x] = srand(256);
          wr(0, (c*H + y)*W + x, map[c][y][x]);
        end
    for (int k = 0; k < CO; k++) begin
      bs[k] = srand(100);
      wr(2, k, bs[k]);
      for (int c = 0; c < CI; c++) begin
        g[k][c] = new[K*K];
        for (int e = 0; e < K*K; e++) g[k][c][e] = srand(64);
        for (int a = 0; a < N; a++)
          for (int b = 0; b < N; b++) wr(1, ((k*CI + c)*N + a)*N + b, fft_kernel(N, K, g[k][c], a, b));
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
    // per group: CI channels of (2N/CORES + N + 3) cycles, then PAR_K inverse
    // transforms of (2N/CORES + 1) cycles and N output rows each
    checks++;
    if (cyc != (CO/PK) * (CI * (2*N/2 + N + 3) + PK * (2*N/2 + 2 + N) + 2)) begin
      failures++;
      $display("busy %0d cycles, expected %0d", cyc, (CO/PK) * (CI * (2*N/2 + N + 3) + PK * (2*N/2 + 2 + N) + 2));
    end
    for (int k = 0; k < CO; k++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          automatic longint acc = 0;
          for (int c = 0; c < CI; c++)
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++) begin
                automatic int yy = y - P + i, xx = x - P + j;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W) acc += longint'(map[c][yy][xx]) * g[k][c][i*K+j];
              end
          rd_addr = (k*H + y)*W + x;
          #1;
          checks++;
          if (abs_i(int'(rd) - requant_ref(acc, bs[k], FRAC)) > 3) begin
            failures++;
            if (failures < 6) $display("k=%0d (%0d,%0d) got %0d exp %0d", k, y, x, rd, requant_ref(acc, bs[k], FRAC));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
