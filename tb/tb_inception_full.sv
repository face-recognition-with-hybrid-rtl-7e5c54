// tb_inception_full: end-to-end test of one Inception module with every
// parameter at its default (16 -> 16+16+16+16 channels, 24x24 map,
// Winograd F(4x4,3x3) and 32-point FFT, parallel factor 4).
//
// It loads a random input map, 1x1 weights, Winograd-transformed 3x3 weights
// and FFT-transformed 5x5 kernel spectra (all computed here from spatial
// kernels), runs the module, and compares every word of the concatenated
// output with direct convolutions (and a 3x3 max pool) computed here. The
// 3x3 kernels are multiples of 576, for which G g G^T is exact, so the
// Winograd branch must match bit for bit; the FFT branch may differ by its
// rounding (at most 4 LSB). It also counts the mechanisms the module relies
// on and fails if one never happened: the split copy, all four branches
// busy at once, Winograd tile beats, inverse FFTs over accumulated partial
// sums, and the concatenating copy.
module tb_inception_full;
  import hec_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int CI = 16, H = 24, W = 24, C1 = 16, C3 = 16, C5 = 16;
  localparam int N = 32, CORES = 4, PAR = 4, M = 4;
  localparam int PL = H * W;

  logic        in_we, wt_we, b_we, start, busy, done;
  logic [1:0]  wt_sel, b_sel;
  logic [31:0] in_addr, wt_addr, b_addr, out_addr, wt_data;
  data_t       in_data, b_data, out_data;
  logic [3:0]  branch_busy;

  inception_module dut (
    .clk, .rst_n, .in_we, .in_addr, .in_data, .wt_we, .wt_sel, .wt_addr, .wt_data,
    .b_we, .b_sel, .b_addr, .b_data, .start, .busy, .done, .branch_busy, .out_addr, .out_data);

  int map [CI][H][W];
  int w1  [C1][CI];
  int w3  [C3][CI][9];
  int w5  [C5][CI][];
  int bs  [3][];

  // mechanism counters
  int n_split = 0, n_all_busy = 0, n_wino_beats = 0, n_ifft = 0, n_combine = 0;
  always @(negedge clk) begin
    if (dut.sp_we) n_split++;
    if (&branch_busy) n_all_busy++;
    if (dut.g_conv3_wino.u_br.e_valid) n_wino_beats++;
    if (dut.g_conv5_fft.u_br.u_eng.f_start && dut.g_conv5_fft.u_br.u_eng.state == 3'd3) n_ifft++;
    if (dut.cb_we) n_combine++;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int kind, input int sel, input int a, input logic [31:0] v);
    @(negedge clk);
    {in_we, wt_we, b_we} = '0;
    if (kind == 0) begin in_we = 1; in_addr = a; in_data = data_t'(v); end
    if (kind == 1) begin wt_we = 1; wt_sel = 2'(sel); wt_addr = a; wt_data = v; end
    if (kind == 2) begin b_we = 1; b_sel = 2'(sel); b_addr = a; b_data = data_t'(v); end
  endtask

  function automatic int cc(input int y, input int x);
    return (y >= 0 && y < H && x >= 0 && x < W) ? 1 : 0;
  endfunction

  initial begin
    int cyc, maxerr;
    {in_we, wt_we, b_we, start} = '0;
    {wt_sel, b_sel} = '0;
    {in_addr, wt_addr, b_addr, out_addr, wt_data} = '0;
    {in_data, b_data} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < CI; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          map[c][y][x] = srand(16);
          wr(0, 0, (c*H + y)*W + x, 32'(map[c][y][x]));
        end
    bs[0] = new[C1];
    bs[1] = new[C3];
    bs[2] = new[C5];
    for (int k = 0; k < C1; k++) begin
      bs[0][k] = srand(50);
      wr(2, 0, k, 32'(bs[0][k]));
      for (int c = 0; c < CI; c++) begin
        w1[k][c] = srand(128);
        wr(1, 0, k*CI + c, 32'(w1[k][c]));
      end
    end
    for (int k = 0; k < C3; k++) begin
      bs[1][k] = srand(50);
      wr(2, 1, k, 32'(bs[1][k]));
      for (int c = 0; c < CI; c++) begin
        for (int e = 0; e < 9; e++) w3[k][c][e] = srand(1) * 576;
        for (int a = 0; a < M + 2; a++)
          for (int b = 0; b < M + 2; b++)
            wr(1, 1, ((k*CI + c)*(M+2) + a)*(M+2) + b, 32'(wino_u(M, w3[k][c], a, b)));
      end
    end
    for (int k = 0; k < C5; k++) begin
      bs[2][k] = srand(50);
      wr(2, 2, k, 32'(bs[2][k]));
      for (int c = 0; c < CI; c++) begin
        w5[k][c] = new[25];
        for (int e = 0; e < 25; e++) w5[k][c][e] = srand(64);
        for (int u = 0; u < N; u++)
          for (int v = 0; v < N; v++) wr(1, 2, ((k*CI + c)*N + u)*N + v, fft_kernel(N, 5, w5[k][c], u, v));
      end
    end
    @(negedge clk);
    {in_we, wt_we, b_we} = '0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    $display("module run took %0d cycles", cyc);
    // mechanisms
    checks += 5;
    if (n_split != CI * PL) begin failures++; $display("split copied %0d words", n_split); end
    if (n_all_busy == 0) begin failures++; $display("branches never ran concurrently"); end
    if (n_wino_beats != (C3/PAR) * ((H+M-1)/M) * ((W+M-1)/M) * CI) begin
      failures++; $display("winograd beats %0d", n_wino_beats);
    end
    if (n_ifft != C5) begin failures++; $display("inverse FFTs %0d, expected %0d", n_ifft, C5); end
    if (n_combine != (C1 + C3 + C5 + CI) * PL) begin failures++; $display("combine copied %0d", n_combine); end
    $display("mechanisms: split %0d, all-busy cycles %0d, winograd beats %0d, IFFTs %0d, combine %0d",
             n_split, n_all_busy, n_wino_beats, n_ifft, n_combine);
    maxerr = 0;
    for (int oc = 0; oc < C1 + C3 + C5 + CI; oc++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          automatic longint acc = 0;
          automatic int e, tol = 0, got;
          if (oc < C1) begin
            for (int c = 0; c < CI; c++) acc += longint'(map[c][y][x]) * w1[oc][c];
            e = requant_ref(acc, bs[0][oc], FRAC);
          end else if (oc < C1 + C3) begin
            for (int c = 0; c < CI; c++)
              for (int i = 0; i < 3; i++)
                for (int j = 0; j < 3; j++)
                  if (cc(y+i-1, x+j-1) != 0) acc += longint'(map[c][y+i-1][x+j-1]) * w3[oc-C1][c][i*3+j];
            e = requant_ref(acc, bs[1][oc-C1], FRAC);
          end else if (oc < C1 + C3 + C5) begin
            for (int c = 0; c < CI; c++)
              for (int i = 0; i < 5; i++)
                for (int j = 0; j < 5; j++)
                  if (cc(y+i-2, x+j-2) != 0) acc += longint'(map[c][y+i-2][x+j-2]) * w5[oc-C1-C3][c][i*5+j];
            e = requant_ref(acc, bs[2][oc-C1-C3], FRAC);
            tol = 4;
          end else begin
            e = -32768;
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++)
                if (cc(y+i-1, x+j-1) != 0 && map[oc-C1-C3-C5][y+i-1][x+j-1] > e) e = map[oc-C1-C3-C5][y+i-1][x+j-1];
          end
          out_addr = (oc*H + y)*W + x;
          #1;
          got = out_data;
          checks++;
          if (abs_i(got - e) > maxerr && tol > 0) maxerr = abs_i(got - e);
          if (abs_i(got - e) > tol) begin
            failures++;
            if (failures < 10) $display("ch %0d (%0d,%0d): got %0d exp %0d", oc, y, x, got, e);
          end
        end
    $display("largest FFT-branch error: %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
