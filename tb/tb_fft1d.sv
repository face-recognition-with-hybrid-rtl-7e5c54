// tb_fft1d: compares the 8- and 32-point cores, forward and inverse, with a
// direct DFT computed in floating point, within a tolerance set by the
// Q1.14 twiddles and per-stage rounding.
module tb_fft1d;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int W = 40;

  logic                inv;
  logic signed [W-1:0] a_re [8], a_im [8], ya_re [8], ya_im [8];
  logic signed [W-1:0] b_re [32], b_im [32], yb_re [32], yb_im [32];

  fft1d #(.N(8),  .W(W)) dut8  (.inv, .x_re(a_re), .x_im(a_im), .y_re(ya_re), .y_im(ya_im));
  fft1d #(.N(32), .W(W)) dut32 (.inv, .x_re(b_re), .x_im(b_im), .y_re(yb_re), .y_im(yb_im));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int n, input bit iv);
    for (int k = 0; k < n; k++) begin
      real er, ei, th, tol, mag, gr, gi;
      er  = 0.0;
      ei  = 0.0;
      mag = 0.0;
      for (int t = 0; t < n; t++) begin
        real xr, xi;
        xr  = (n == 8) ? real'(a_re[t]) : real'(b_re[t]);
        xi  = (n == 8) ? real'(a_im[t]) : real'(b_im[t]);
        th  = (iv ? 2.0 : -2.0) * PI * real'((t * k) % n) / real'(n);
        er += xr * $cos(th) - xi * $sin(th);
        ei += xr * $sin(th) + xi * $cos(th);
        mag += ((xr < 0) ? -xr : xr) + ((xi < 0) ? -xi : xi);
      end
      if (iv) begin
        er  = er / real'(n);
        ei  = ei / real'(n);
        mag = mag / real'(n);
      end
      tol = 3.0 + 2.0e-4 * mag;
      gr  = (n == 8) ? real'(ya_re[k]) : real'(yb_re[k]);
      gi  = (n == 8) ? real'(ya_im[k]) : real'(yb_im[k]);
      checks++;
      if ((gr - er > tol) || (er - gr > tol) || (gi - ei > tol) || (ei - gi > tol)) begin
        failures++;
        if (failures < 6) $display("N=%0d inv=%0b k=%0d got (%0f,%0f) exp (%0f,%0f)", n, iv, k, gr, gi, er, ei);
      end
    end
  endtask

  initial begin
    for (int it = 0; it < 100; it++) begin
      inv = it[0];
      for (int t = 0; t < 8; t++) begin
        a_re[t] = W'(srand(30000));
        a_im[t] = W'(srand(30000));
      end
      for (int t = 0; t < 32; t++) begin
        b_re[t] = W'(srand(30000));
        b_im[t] = W'(srand(30000));
      end
      #1;
      check(8, inv);
      check(32, inv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
