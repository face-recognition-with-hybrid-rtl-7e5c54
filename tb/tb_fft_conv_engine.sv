// tb_fft_conv_engine: FFT-based 5x5 convolution of a 4x4 map over three
// input channels with N = 8, PAR_K = 2. The kernel spectra are computed here
// from random spatial kernels; the streamed output window is compared with a
// direct correlation within a small rounding tolerance. Also checks the
// cycle count of a channel and that exactly PAR_K x N output rows appear.
module tb_fft_conv_engine;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 8, PK = 2, CORES = 2, K = 5, HM = 4, C = 3, P = K / 2;

  logic         iv, fi, la, ready, ov;
  data_t        x [N][N];
  logic [2:0]   krow_idx, out_row;
  logic [1:0]   out_k;
  cdata_t       krow [PK][N];
  data_t        bias [PK];
  data_t        od [N];

  fft_conv_engine #(.N(N), .PAR_K(PK), .CORES(CORES)) dut (.clk, .rst_n, .in_valid(iv), .in_first(fi),
    .in_last(la), .x, .ready, .krow_idx, .krow, .bias, .out_valid(ov), .out_k, .out_row, .out_data(od));

  int     map  [C][HM][HM];
  int     w    [C][PK][];
  cdata_t spec [C][PK][N][N];
  int     cur_c;
  int     rows_seen;
  int     got  [PK][N][N];

  always_comb
    for (int k = 0; k < PK; k++)
      for (int v = 0; v < N; v++) krow[k][v] = spec[cur_c][k][krow_idx][v];

  always @(negedge clk)
    if (ov) begin
      rows_seen++;
      for (int v = 0; v < N; v++) got[out_k][out_row][v] = od[v];
    end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    {iv, fi, la} = '0;
    cur_c = 0;
    for (int c = 0; c < C; c++)
      for (int k = 0; k < PK; k++)
        for (int u = 0; u < N; u++)
          for (int v = 0; v < N; v++) spec[c][k][u][v] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4; it++) begin
      rows_seen = 0;
      for (int k = 0; k < PK; k++) bias[k] = data_t'(srand(50));
      for (int c = 0; c < C; c++) begin
        for (int i = 0; i < HM; i++) for (int j = 0; j < HM; j++) map[c][i][j] = srand(256);
        for (int k = 0; k < PK; k++) begin
          w[c][k] = new[K*K];
          for (int e = 0; e < K*K; e++) w[c][k][e] = srand(64);
          for (int u = 0; u < N; u++)
            for (int v = 0; v < N; v++) spec[c][k][u][v] = cdata_t'(fft_kernel(N, K, w[c][k], u, v));
        end
      end
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        while (!ready) @(negedge clk);
        cur_c = c;
        for (int u = 0; u < N; u++)
          for (int v = 0; v < N; v++)
            x[u][v] = (u >= P && u < P + HM && v >= P && v < P + HM) ? data_t'(map[c][u-P][v-P]) : '0;
        {iv, fi, la} = {1'b1, c == 0, c == C - 1};
        @(negedge clk);
        iv  = 0;
        cyc = 1;
        while (!ready) begin
          @(negedge clk);
          cyc++;
        end
        if (c < C - 1) begin
          checks++;
          if (cyc != 2 * N / CORES + N + 3) begin
            failures++;
            $display("channel took %0d cycles, expected %0d", cyc, 2 * N / CORES + N + 3);
          end
        end
      end
      @(negedge clk);
      checks++;
      if (rows_seen != PK * N) begin
        failures++;
        $display("saw %0d output rows, expected %0d", rows_seen, PK * N);
      end
      for (int k = 0; k < PK; k++)
        for (int y = 0; y < HM; y++)
          for (int xx = 0; xx < HM; xx++) begin
            automatic longint acc = 0;
            automatic int e;
            for (int c = 0; c < C; c++)
              for (int i = 0; i < K; i++)
                for (int j = 0; j < K; j++) begin
                  automatic int yy = y + i - P, xc = xx + j - P;
                  if (yy >= 0 && yy < HM && xc >= 0 && xc < HM) acc += longint'(map[c][yy][xc]) * w[c][k][i*K+j];
                end
            e = requant_ref(acc, bias[k], FRAC);
            checks++;
            if (abs_i(got[k][y][xx] - e) > 3) begin
              failures++;
              if (failures < 8) $display("k=%0d (%0d,%0d) got %0d exp %0d", k, y, xx, got[k][y][xx], e);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
