// tb_fft2d: 8x8 transform with 2 cores per array: compares forward and
// inverse results with a direct 2D DFT in floating point, and checks that a
// transform takes 2*N/CORES + 1 cycles from start to done.
module tb_fft2d;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 8, W = 40, CORES = 2;
  logic                start, inv, busy, done;
  logic signed [W-1:0] x_re [N][N], x_im [N][N], tm_re [N][N], tm_im [N][N];

  fft2d #(.N(N), .W(W), .CORES(CORES)) dut (.clk, .rst_n, .start, .inv, .x_re, .x_im,
    .busy, .done, .tm_re, .tm_im);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start = 0;
    inv   = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 6; it++) begin
      @(negedge clk);
      inv = it[0];
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          x_re[r][c] = W'(srand(it[0] ? 2000000 : 20000));
          x_im[r][c] = it[1] ? W'(srand(20000)) : '0;
        end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != 2 * N / CORES + 1) begin
        failures++;
        $display("transform took %0d cycles, expected %0d", cyc, 2 * N / CORES + 1);
      end
      for (int u = 0; u < N; u++)
        for (int v = 0; v < N; v++) begin
          real er, ei, th, mag, tol;
          er  = 0.0;
          ei  = 0.0;
          mag = 0.0;
          for (int r = 0; r < N; r++)
            for (int c = 0; c < N; c++) begin
              th  = (inv ? 2.0 : -2.0) * PI * real'((u * r + v * c) % N) / real'(N);
              er += real'(x_re[r][c]) * $cos(th) - real'(x_im[r][c]) * $sin(th);
              ei += real'(x_re[r][c]) * $sin(th) + real'(x_im[r][c]) * $cos(th);
              mag += ((x_re[r][c] < 0) ? -real'(x_re[r][c]) : real'(x_re[r][c]));
            end
          if (inv) begin
            er  = er / real'(N * N);
            ei  = ei / real'(N * N);
            mag = mag / real'(N * N);
          end
          tol = 6.0 + 3.0e-4 * mag;
          checks++;
          if ((real'(tm_re[u][v]) - er > tol) || (er - real'(tm_re[u][v]) > tol) ||
              (real'(tm_im[u][v]) - ei > tol) || (ei - real'(tm_im[u][v]) > tol)) begin
            failures++;
            if (failures < 6)
              $display("inv=%0b (%0d,%0d) got (%0d,%0d) exp (%0f,%0f)", inv, u, v, tm_re[u][v], tm_im[u][v], er, ei);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
