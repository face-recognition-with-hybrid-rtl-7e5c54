// tb_ref_pkg: reference arithmetic for the testbenches, written
// independently of the design: the Winograd kernel matrix G, the offline
// kernel transforms (Winograd U = G g G^T, FFT conj(FFT2(w))), the output
// rounding rule, and a check counter helper.
package tb_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  // Round to nearest, ties away from zero.
  function automatic int rnd(input real v);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  // Output rule: (acc + 2^(frac-1)) >> frac (floor), + bias, saturate to 16 bits.
  function automatic int requant_ref(input longint acc, input int bias, input int frac);
    longint r;
    r = (acc + (64'sd1 <<< (frac - 1))) >>> frac;
    r = r + bias;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // G of F(m x m, 3 x 3), (m+2) x 3.
  function automatic real g_mat(input int m, input int i, input int j);
    real g2 [4][3];
    real g4 [6][3];
    g2 = '{'{1.0, 0.0, 0.0}, '{0.5, 0.5, 0.5}, '{0.5, -0.5, 0.5}, '{0.0, 0.0, 1.0}};
    g4 = '{'{0.25, 0.0, 0.0},
           '{-1.0/6.0, -1.0/6.0, -1.0/6.0},
           '{-1.0/6.0,  1.0/6.0, -1.0/6.0},
           '{1.0/24.0,  1.0/12.0, 1.0/6.0},
           '{1.0/24.0, -1.0/12.0, 1.0/6.0},
           '{0.0, 0.0, 1.0}};
    return (m == 2) ? g2[i][j] : g4[i][j];
  endfunction

  // U[a][b] = round(sum G[a][i] g[i][j] G[b][j]) for a 3x3 kernel g given as
  // a flat row-major array of 9 integers.
  function automatic int wino_u(input int m, input int g[9], input int a, input int b);
    real s;
    s = 0.0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        s += g_mat(m, a, i) * real'(g[i*3 + j]) * g_mat(m, b, j);
    return rnd(s);
  endfunction

  // conj(FFT2(w zero-padded to n x n)) at (u, v), for a k x k kernel given
  // row-major. Returns {re, im} rounded to 16 bits each.
  function automatic logic [31:0] fft_kernel(input int n, input int k, input int w[], input int u,
                                             input int v);
    real re, im, th;
    re = 0.0;
    im = 0.0;
    for (int i = 0; i < k; i++)
      for (int j = 0; j < k; j++) begin
        th = 2.0 * PI * real'(((u * i) % n) * 1 + 0) / real'(n) + 2.0 * PI * real'((v * j) % n) / real'(n);
        re += real'(w[i*k + j]) * $cos(th);
        im += real'(w[i*k + j]) * $sin(th);
      end
    return {16'(sat(longint'(rnd(re)))), 16'(sat(longint'(rnd(im))))};
  endfunction

  function automatic int abs_i(input int v);
    return (v < 0) ? -v : v;
  endfunction

  // Small signed random value in [-r, r].
  function automatic int srand(input int r);
    return int'($urandom_range(2 * r, 0)) - r;
  endfunction

endpackage
