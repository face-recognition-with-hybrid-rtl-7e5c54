// hec_pkg: types, constants and helper functions shared by the hybrid
// convolution engines (conventional, Winograd and FFT) and the Inception
// module built from them.
//
// Numbers: feature maps and weights are 16-bit signed fixed point, as in the
// paper's implementation ("16-bit fixed point for both weight and feature
// map"). The split between integer and fraction bits is this design's own
// choice: FRAC = 8 fraction bits (Q7.8). Products are accumulated at full
// precision in 48 bits and brought back to 16 bits once per output by
// requant(): round to nearest, add the bias, saturate.
//
// The Winograd transform matrices B^T and A^T for F(2x2,3x3) and F(4x4,3x3)
// are the standard Cook-Toom matrices (Lavin and Gray). Both are integer, so
// the transforms need only shifts and adds. The kernel-side matrix G holds
// fractions; the kernels are transformed offline, as in the paper.
package hec_pkg;

  localparam int DW   = 16;   // data width of feature maps and weights
  localparam int FRAC = 8;    // fraction bits of the fixed-point format
  localparam int AW   = 48;   // accumulator width

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;

  // Complex 16-bit word: a pre-transformed FFT kernel coefficient.
  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cdata_t;

  // Convolution algorithm of a branch (the paper's Table 4 entries).
  typedef enum logic [1:0] {
    ALG_CONV = 2'd0,   // conventional loop-optimised convolution
    ALG_WINO = 2'd1,   // Winograd minimal filtering
    ALG_FFT  = 2'd2    // FFT-based convolution
  } alg_e;

  localparam data_t DATA_MAX = data_t'(16'sh7fff);
  localparam data_t DATA_MIN = data_t'(-16'sh8000);

  function automatic data_t sat16(input acc_t v);
    if (v > acc_t'(DATA_MAX)) return DATA_MAX;
    if (v < acc_t'(DATA_MIN)) return DATA_MIN;
    return data_t'(v);
  endfunction

  // Accumulator in Q.(2*FRAC) to a 16-bit Q.FRAC output with bias.
  function automatic data_t requant(input acc_t acc, input data_t bias);
    acc_t r;
    r = (acc + (acc_t'(1) <<< (FRAC - 1))) >>> FRAC;
    r = r + acc_t'(bias);
    return sat16(r);
  endfunction

  // B^T of F(m x m, 3 x 3), (m+2) x (m+2), for m = 2 and m = 4.
  function automatic int wino_bt(input int m, input int i, input int j);
    int bt2 [4][4];
    int bt4 [6][6];
    bt2 = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};
    bt4 = '{'{4,  0, -5,  0, 1, 0},
            '{0, -4, -4,  1, 1, 0},
            '{0,  4, -4, -1, 1, 0},
            '{0, -2, -1,  2, 1, 0},
            '{0,  2, -1, -2, 1, 0},
            '{0,  4,  0, -5, 0, 1}};
    return (m == 2) ? bt2[i][j] : bt4[i][j];
  endfunction

  // A^T of F(m x m, 3 x 3), m x (m+2).
  function automatic int wino_at(input int m, input int i, input int j);
    int at2 [2][4];
    int at4 [4][6];
    at2 = '{'{1, 1, 1, 0}, '{0, 1, -1, -1}};
    at4 = '{'{1, 1,  1, 1,  1, 0},
            '{0, 1, -1, 2, -2, 0},
            '{0, 1,  1, 4,  4, 0},
            '{0, 1, -1, 8, -8, 1}};
    return (m == 2) ? at2[i][j] : at4[i][j];
  endfunction

  // FFT twiddle factors in Q1.14: round(16384 * cos/sin(2*pi*k/n)).
  // Computed with a Taylor series so that it stays a plain constant function.
  localparam int TWQ = 14;

  function automatic real taylor_cs(input real a, input bit want_sin);
    real term, sum;
    int  i;
    if (want_sin) begin
      term = a;
      sum  = a;
      for (i = 1; i < 30; i++) begin
        term = -term * a * a / ((2 * i) * (2 * i + 1));
        sum  = sum + term;
      end
    end else begin
      term = 1.0;
      sum  = 1.0;
      for (i = 1; i < 30; i++) begin
        term = -term * a * a / ((2 * i - 1) * (2 * i));
        sum  = sum + term;
      end
    end
    return sum;
  endfunction

  function automatic int twiddle_q(input int k, input int n, input bit want_sin);
    real a, v;
    a = 2.0 * 3.14159265358979323846 * real'(k) / real'(n);
    if (a > 3.14159265358979323846) a = a - 2.0 * 3.14159265358979323846;
    v = taylor_cs(a, want_sin) * 16384.0;
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  function automatic int clog2i(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

endpackage
