// fft4: 4-point FFT of real samples in two radix-2 decimation-in-time stages.
//
// Samples arrive in bit-reversed order, the order of the inputs in1..in4 of
// the published waveform: i1 = x(0), i2 = x(2), i3 = x(1), i4 = x(3).
//   stage 1:  (a, b) = fft2(i1, i2, w0)      a = i1 + w0*i2, b = i1 - w0*i2
//             (c, d) = fft2(i3, i4, w0)      c = i3 + w0*i4, d = i3 - w0*i4
//   stage 2:  (X0, X2) = fft2(a, c, w0)      real outputs
//             X1 = b + j*(w1*d),  X3 = b - j*(w1*d)
// w0 is the real twiddle W^0 (1) and w1 the magnitude of the imaginary
// twiddle W_4^1 (1), both 4-bit unsigned. The rotation by the imaginary
// twiddle costs no adder on the real part: X1 and X3 share the real part b,
// and their imaginary parts are +w1*d (tw_mult) and its negation
// (vedic_subtractor from 0).
//
// Sign of the imaginary parts: the published waveform (inputs 0, 2, 1, 3 and
// w0 = w1 = 1) shows -2 on the second "out2" trace and +2 on the second
// "out4" trace, which is b + j*w1*d for X1. This is followed here. With the
// kernel e^{-j2pi nk/4} the two would be swapped; for real inputs the pair
// (X1, X3) produced here equals the conventional (X(3), X(1)).
//
// Interface: i1..i4 (DATA_W bits), w0, w1 (4 bits) -> x0, x1_re, x1_im, x2,
// x3_re, x3_im (DATA_W bits, two's complement, modulo 2^DATA_W).
// Combinational, no clock.
module fft4 #(
  parameter int unsigned DATA_W = fft_pkg::DATA_W
) (
  input  logic [DATA_W-1:0] i1,
  input  logic [DATA_W-1:0] i2,
  input  logic [DATA_W-1:0] i3,
  input  logic [DATA_W-1:0] i4,
  input  logic [3:0]        w0,
  input  logic [3:0]        w1,
  output logic [DATA_W-1:0] x0,
  output logic [DATA_W-1:0] x1_re,
  output logic [DATA_W-1:0] x1_im,
  output logic [DATA_W-1:0] x2,
  output logic [DATA_W-1:0] x3_re,
  output logic [DATA_W-1:0] x3_im
);
  logic [DATA_W-1:0] a, b, c, d, rot;
  logic              unused_borrow;

  // stage 1
  fft2 #(.DATA_W(DATA_W)) u_s1_lo (.x0(i1), .x1(i2), .w(w0), .y0(a), .y1(b));
  fft2 #(.DATA_W(DATA_W)) u_s1_hi (.x0(i3), .x1(i4), .w(w0), .y0(c), .y1(d));

  // stage 2, real twiddle
  fft2 #(.DATA_W(DATA_W)) u_s2_re (.x0(a), .x1(c), .w(w0), .y0(x0), .y1(x2));

  // stage 2, imaginary twiddle
  tw_mult #(.DATA_W(DATA_W)) u_rot (.x(d), .w(w1), .y(rot));
  vedic_subtractor #(.WIDTH(DATA_W)) u_neg (
    .a('0), .b(rot), .diff(x3_im), .borrow(unused_borrow));

  assign x1_re = b;
  assign x3_re = b;
  assign x1_im = rot;
endmodule
