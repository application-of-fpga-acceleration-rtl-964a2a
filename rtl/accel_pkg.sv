// accel_pkg: types and constants shared by the FFT accelerator.
//
// A data point is 64 bits wide, as in the evaluated workload (groups of
// 1024 64-bit points). This design reads a point as one complex number of two
// IEEE-754 single-precision values, real part in bits 63:32 and imaginary part
// in bits 31:0; the split is this design's choice. The package also holds the
// elaboration-time helpers that turn a real number into single-precision bits
// (round to nearest even, results below the normal range flushed to zero) and
// that compute the FFT twiddle factors W_N^k = exp(-j*2*pi*k/N).
package accel_pkg;

  // One 64-bit point: {re, im}, each an IEEE-754 binary32 value.
  typedef struct packed {
    logic [31:0] re;
    logic [31:0] im;
  } cplx_t;

  localparam logic [31:0] FP32_ONE  = 32'h3F80_0000;
  localparam logic [31:0] FP32_ZERO = 32'h0000_0000;
  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

  localparam real PI = 3.14159265358979323846;

  // real (binary64) -> binary32, round to nearest even, flush-to-zero below
  // the normal range, infinity above it.
  function automatic logic [31:0] real_to_fp32(input real v);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(v);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? FP32_QNAN : {d[63], 8'hFF, 23'b0};
    if (d[62:52] == 0 || e <= 0) return {d[63], 31'b0};
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) e = e + 1;
    if (e >= 255) return {d[63], 8'hFF, 23'b0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  // Twiddle factor W_n^k = cos(2 pi k/n) - j sin(2 pi k/n) as a binary32 pair.
  function automatic cplx_t twiddle(input int k, input int n);
    real a;
    cplx_t w;
    a = 2.0 * PI * real'(k) / real'(n);
    w.re = real_to_fp32($cos(a));
    w.im = real_to_fp32(-$sin(a));
    return w;
  endfunction

endpackage
