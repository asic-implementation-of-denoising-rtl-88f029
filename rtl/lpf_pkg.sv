// lpf_pkg: constants and types shared by the folded low-pass filter.
//
// The filter is the quadratic-spline low-pass stage of a dyadic wavelet
// filter bank for ECG denoising, y[n] = (x[n] + 3x[n-1] + 3x[n-2] + x[n-3]) / 8,
// built from two adders and the shifts >>2 and >>>3. It is folded by a factor
// of two: each adder is time-shared between two of the four additions of the
// unfolded filter. The fold factor and the shift amounts are fixed by the
// filter structure; the sample width is this design's own choice (16-bit
// samples, giving the 17-bit sums seen as reg[0]..reg[16] in the layout).
package lpf_pkg;

  // Folding factor: clock cycles per input sample.
  localparam int unsigned FOLD_N = 2;

  // Default sample width (assumed, not fixed by the filter structure).
  localparam int unsigned DATA_W_DEFAULT = 16;

  // Taps of the input delay line: x[n], x[n-1], x[n-2], x[n-3].
  localparam int unsigned N_TAPS = 4;

  // Shift amounts of the scaling branches: 3/8 = 1/4 + 1/8.
  localparam int unsigned SH_QUARTER = 2;
  localparam int unsigned SH_EIGHTH  = 3;

  // Time slot ("instance") in which a folded adder unit works.
  typedef enum logic {
    INST0 = 1'b0,
    INST1 = 1'b1
  } inst_e;

endpackage
