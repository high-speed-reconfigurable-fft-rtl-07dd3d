// fft_pkg: widths and types shared by the reconfigurable 2/4-point FFT.
//
// Samples enter as 4-bit unsigned numbers and twiddle coefficients as 4-bit
// unsigned numbers, the widths of in1..in4, w0 and w1 in the published
// simulation waveform. Every value inside the butterflies and on the outputs is
// an 8-bit two's-complement number, again the output width of that waveform.
// Arithmetic is modulo 2^8: a result outside -128..127 wraps, it does not
// saturate (the width of internal nodes is this design's own choice).
package fft_pkg;
  parameter int unsigned IN_W   = 4;  // sample width (in1..in4)
  parameter int unsigned TW_W   = 4;  // twiddle width (w0, w1), also the Vedic multiplier operand width
  parameter int unsigned DATA_W = 8;  // internal and output width (out1..out4)

  typedef logic [IN_W-1:0]          sample_t;
  typedef logic [TW_W-1:0]          twiddle_t;
  typedef logic signed [DATA_W-1:0] data_t;

  // Transform length chosen by the select line: 0 selects the 2-point FFT,
  // 1 the 4-point FFT.
  typedef enum logic {MODE_FFT2 = 1'b0, MODE_FFT4 = 1'b1} mode_e;
endpackage
