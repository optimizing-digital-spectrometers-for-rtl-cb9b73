// comca_pkg -- shared constants and types of the frequency-domain TIADC
// calibration (COMCA, "complex calibration").
//
// The calibration works on the complex spectra that per-ADC-core FFTs deliver.
// All values are signed two's-complement fixed point:
//   * FFT bins        : DATA_W bits per real/imaginary part (28 bits, as the
//                       FFT output width the source design quotes for its
//                       DSP-slice count).
//   * coefficients    : COEF_W bits per part (16 bits, as in the source),
//                       format Q2.14 (COEF_FRAC fractional bits, 1.0 = 2^14).
//                       The Q format is this design's own choice.
//   * corrected bins  : OUT_W bits per part, this design's own choice.
//   * integrators     : ACC_W bits per part, this design's own choice.
// Default numbers of the calibrated spectrometer (from the source):
//   M = 8 ADC cores per input, P = 2 spectral bins per ADC core and clock,
//   N = 32768-point total FFT (16k output channels), interpolation factor 4.
package comca_pkg;

  localparam int unsigned DATA_W    = 28;
  localparam int unsigned COEF_W    = 16;
  localparam int unsigned COEF_FRAC = 14;
  localparam int unsigned OUT_W     = 32;
  localparam int unsigned ACC_W     = 64;

  // Complex FFT bin as delivered by a per-ADC-core FFT.
  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } bin_t;

  // Complex calibration coefficient c_{k,m} = H_{k,m} * exp(-2*pi*i*m*k/N).
  typedef struct packed {
    logic signed [COEF_W-1:0] re;
    logic signed [COEF_W-1:0] im;
  } coef_t;

  // Corrected spectral channel.
  typedef struct packed {
    logic signed [OUT_W-1:0] re;
    logic signed [OUT_W-1:0] im;
  } obin_t;

  // Integrated cross product a_m * conj(a_0).
  typedef struct packed {
    logic signed [ACC_W-1:0] re;
    logic signed [ACC_W-1:0] im;
  } acc_t;

  // Complex conjugate of a bin (the negation of the imaginary part wraps only
  // for the most negative value, which a real-input FFT does not produce).
  function automatic bin_t conj_bin(bin_t a);
    bin_t r;
    r.re = a.re;
    r.im = -a.im;
    return r;
  endfunction

  // Ceiling log2 with a minimum of 1, for index widths.
  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
