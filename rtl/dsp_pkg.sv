// dsp_pkg: types, constants and twiddle-factor arithmetic shared by the
// bit-slicing multiplier, the GEMM linear-convolution engine and the
// 64-point radix-2 single-path-delay-feedback (R2SDF) DIF FFT.
//
// Number formats
//   * Multiplier operands: 16-bit two's complement; product 32-bit.
//   * Convolution samples: 16-bit signed; accumulators 32-bit (wrap on overflow).
//   * FFT samples: 12-bit signed at the input, carried inside the pipeline
//     as 16-bit signed real/imaginary pairs (the output width), wrap on overflow.
//   * Twiddle factors: a 24-bit ROM word holding a 12-bit real and a 12-bit
//     imaginary part, each a signed fixed-point number with 10 fraction bits
//     (1.0 = 1024). After a twiddle multiply the product is shifted right by
//     10 bits, i.e. truncated back to the sample width.
// The 12-bit input, 16-bit output and 24-bit twiddle word widths follow the
// published design; the split of the twiddle word, the fraction length and
// the 16-bit internal width are choices of this implementation.
package dsp_pkg;

  // ---------------- bit slicing multiplier ----------------
  localparam int BSM_W     = 16;          // operand width
  localparam int BSM_P     = 4;           // slice width
  localparam int BSM_T     = BSM_W / BSM_P;   // slices per operand (4)
  localparam int BSM_NLUT  = BSM_T * BSM_T;   // 16 LUTs
  localparam int BSM_PW    = 2 * BSM_W;   // product width (32)

  // ---------------- GEMM convolution ----------------
  localparam int CONV_DW    = 16;         // sample width
  localparam int CONV_LEN_W = 4;          // width of n and m  (n,m <= 15)
  localparam int CONV_NREG  = 32;         // register-file arrays
  localparam int CONV_SEL_W = 5;          // select_out width
  localparam int CONV_ACC_W = 32;         // accumulator width

  // ---------------- FFT ----------------
  localparam int FFT_N     = 64;
  localparam int FFT_IN_W  = 12;
  localparam int FFT_DW    = 16;
  localparam int TW_W      = 12;          // one twiddle component
  localparam int TW_FRAC   = 10;          // fraction bits of a twiddle component
  localparam int TW_ONE    = 1 << TW_FRAC;

  typedef logic signed [FFT_DW-1:0] sample_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // A complex sample with its valid flag, as it travels between FFT stages.
  typedef struct packed {
    logic  valid;
    cplx_t d;
  } cplx_v_t;

  typedef logic signed [TW_W-1:0] tw_comp_t;

  // 24-bit twiddle ROM word
  typedef struct packed {
    tw_comp_t re;
    tw_comp_t im;
  } tw_t;

  localparam real PI = 3.14159265358979323846;

  function automatic tw_comp_t q_round(real v);
    return tw_comp_t'($rtoi(v < 0.0 ? v - 0.5 : v + 0.5));
  endfunction

  // W_M^k = exp(-j*2*pi*k/M) in the twiddle format.
  function automatic tw_t twiddle(int k, int m);
    tw_t w;
    real th;
    th   = 2.0 * PI * real'(k) / real'(m);
    w.re = q_round($cos(th) * real'(TW_ONE));
    w.im = q_round(-$sin(th) * real'(TW_ONE));
    return w;
  endfunction

  localparam tw_t TW_UNITY = '{re: tw_comp_t'(TW_ONE), im: '0};

endpackage
