// wavelet_pkg: types and constants shared by the wavelet frequency detector.
//
// The detector correlates a 20 ksps stream of 14-bit signed ADC samples with a
// complex Morlet wavelet tuned to 6 kHz and drives eight LEDs from the
// magnitude-squared response.  This package holds the sample and accumulator
// widths, the 133 real (in-phase) and imaginary (quadrature) wavelet
// coefficients, the full-scale response and the LED thresholds derived from it.
//
// Coefficients (the sizes 133 taps, 14-bit, 6 kHz, 20 ksps and the x8191 scaling
// with truncation are from the original design; the normalisation and
// the Gaussian width are this implementation's choice):
//   t[n]   = (n - 66) / 20000 s,                 n = 0 .. 132
//   g[n]   = exp(-t[n]^2 / (2 * (4 / 6000)^2))   (Morlet width 4)
//   K      = 1 / (2*pi * sum_n g[n])
//   COEF_RE[n] = trunc(8191 * K * g[n] * cos(2*pi*6000*t[n]))
//   COEF_IM[n] = trunc(8191 * K * g[n] * sin(2*pi*6000*t[n]))
// giving a peak coefficient magnitude of 39 and sum |COEF_RE| = 803,
// sum |COEF_IM| = 770.
//
// RESP_MAX is the largest magnitude-squared response to a full-scale
// (amplitude 8191, truncated) 6 kHz cosine, maximised over 64 start phases.
// The LED thresholds follow from it: threshold k (k = 1..8) is
// k*RESP_MAX/8 - RESP_MAX/16, the middle of the k-th eighth of the range.
package wavelet_pkg;

  localparam int unsigned SAMPLE_W  = 14;   // ADC sample width
  localparam int unsigned PART_W    = 33;   // real / imaginary accumulator width
  localparam int unsigned RESP_W    = 50;   // magnitude-squared width
  localparam int unsigned NUM_TAPS  = 133;  // wavelet length
  localparam int unsigned NUM_LEDS  = 8;
  localparam int unsigned CMP_LSB   = 32;   // LED compare uses resp[RESP_W-1:CMP_LSB]

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [SAMPLE_W-1:0] coef_t;
  typedef logic signed [PART_W-1:0]   part_t;
  typedef logic signed [RESP_W-1:0]   resp_t;

  localparam coef_t COEF_RE [NUM_TAPS] = '{
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,   -1,    0,    1,   -1,    0,
       3,   -1,   -3,    4,    1,   -6,    2,    7,   -8,   -3,   12,   -4,
     -12,   13,    5,  -20,    6,   19,  -21,   -8,   29,   -9,  -26,   27,
      10,  -36,   11,   30,  -31,  -12,   39,  -12,  -31,   30,   11,  -36,
      10,   27,  -26,   -9,   29,   -8,  -21,   19,    6,  -20,    5,   13,
     -12,   -4,   12,   -3,   -8,    7,    2,   -6,    1,    4,   -3,   -1,
       3,    0,   -1,    1,    0,   -1,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0
  };

  localparam coef_t COEF_IM [NUM_TAPS] = '{
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,   -1,    1,    1,   -2,
       0,    3,   -2,   -2,    5,    0,   -7,    5,    5,  -10,    0,   13,
      -9,  -10,   18,    0,  -21,   14,   15,  -26,    0,   29,  -19,  -19,
      33,    0,  -35,   22,   22,  -36,    0,   36,  -22,  -22,   35,    0,
     -33,   19,   19,  -29,    0,   26,  -15,  -14,   21,    0,  -18,   10,
       9,  -13,    0,   10,   -5,   -5,    7,    0,   -5,    2,    2,   -3,
       0,    2,   -1,   -1,    1,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,    0,
       0
  };

  localparam resp_t RESP_MAX = 50'sd26309800558864;


  // Sum of coefficient magnitudes; bounds |real| and |imag| for a full-scale input.
  function automatic longint coef_abs_sum(input coef_t c [NUM_TAPS]);
    longint s = 0;
    for (int i = 0; i < NUM_TAPS; i++) s += (c[i] < 0) ? -longint'(c[i]) : longint'(c[i]);
    return s;
  endfunction

endpackage
