// reconf_fft: run-time reconfigurable FFT that computes either a 2-point or a
// 4-point transform of 4-bit samples, chosen by one select line.
//
// Structure: an input switch steers the samples to one of two independent
// transform units, a 2-point FFT (fft2) and a 4-point FFT (fft4), and an
// output merge passes the results of the selected unit to the outputs.
//   select = 0 : 2-point FFT of (in1, in2) with twiddle w0
//                out1 = in1 + w0*in2, out2 = in1 - w0*in2, other outputs 0
//   select = 1 : 4-point FFT of in1..in4, given in bit-reversed order
//                (in1 = x(0), in2 = x(2), in3 = x(1), in4 = x(3)):
//                out1 = X0, out2 + j*out2_im = X1, out3 = X2,
//                out4 + j*out4_im = X3 (see fft4 for the sign convention)
// The unit that is not selected sees all-zero samples and twiddles, so its
// nodes do not toggle while the other one works; this operand isolation is
// how the run-time choice saves power here.
//
// Interface: samples in1..in4 and twiddles w0, w1 are 4-bit unsigned; all
// outputs are 8-bit two's complement, wrapping modulo 256 when a result
// leaves -128..127. Purely combinational: a change of inputs or of select
// shows on the outputs after the logic delay, with no clock and no reset.
//
// Following the paper: the block diagram (switch, 2-point FFT, 4-point FFT,
// merge), the select line, the port names and widths and the test values of
// its simulation waveform, and the use of Vedic adders, subtractors and 4x4
// Vedic multipliers built from 2x2 ones. This design's own choices: the
// bit-reversed input order and imaginary-part sign (read off the waveform
// values), the select encoding, zero on unused outputs, zeroing the idle
// unit, the names out2_im / out4_im for the second out2 and out4 traces, and
// modulo-256 wrap-around.
module reconf_fft
  import fft_pkg::*;
(
  input  sample_t  in1,
  input  sample_t  in2,
  input  sample_t  in3,
  input  sample_t  in4,
  input  twiddle_t w0,
  input  twiddle_t w1,
  input  logic     select,
  output data_t    out1,
  output data_t    out2,
  output data_t    out2_im,
  output data_t    out3,
  output data_t    out4,
  output data_t    out4_im
);
  mode_e mode;
  assign mode = mode_e'(select);

  // samples widened to the datapath width (unsigned, so zero-extended)
  data_t s1, s2, s3, s4;
  assign s1 = data_t'(in1);
  assign s2 = data_t'(in2);
  assign s3 = data_t'(in3);
  assign s4 = data_t'(in4);

  // input switch: the idle unit gets zeros
  data_t    f2_x0, f2_x1;
  twiddle_t f2_w;
  data_t    f4_i1, f4_i2, f4_i3, f4_i4;
  twiddle_t f4_w0, f4_w1;

  always_comb begin
    f2_x0 = '0; f2_x1 = '0; f2_w = '0;
    f4_i1 = '0; f4_i2 = '0; f4_i3 = '0; f4_i4 = '0; f4_w0 = '0; f4_w1 = '0;
    if (mode == MODE_FFT2) begin
      f2_x0 = s1; f2_x1 = s2; f2_w = w0;
    end else begin
      f4_i1 = s1; f4_i2 = s2; f4_i3 = s3; f4_i4 = s4; f4_w0 = w0; f4_w1 = w1;
    end
  end

  // the unit that is not selected must see only zeros
  always_comb begin : idle_unit_isolated
    if (mode == MODE_FFT2)
      assert ({f4_i1, f4_i2, f4_i3, f4_i4, f4_w0, f4_w1} == '0)
        else $error("4-point unit not isolated in 2-point mode");
    else
      assert ({f2_x0, f2_x1, f2_w} == '0)
        else $error("2-point unit not isolated in 4-point mode");
  end

  data_t f2_y0, f2_y1;
  data_t f4_x0, f4_x1_re, f4_x1_im, f4_x2, f4_x3_re, f4_x3_im;

  fft2 #(.DATA_W(DATA_W)) u_fft2 (
    .x0(f2_x0), .x1(f2_x1), .w(f2_w), .y0(f2_y0), .y1(f2_y1));

  fft4 #(.DATA_W(DATA_W)) u_fft4 (
    .i1(f4_i1), .i2(f4_i2), .i3(f4_i3), .i4(f4_i4), .w0(f4_w0), .w1(f4_w1),
    .x0(f4_x0), .x1_re(f4_x1_re), .x1_im(f4_x1_im), .x2(f4_x2),
    .x3_re(f4_x3_re), .x3_im(f4_x3_im));

  // output merge
  always_comb begin
    if (mode == MODE_FFT2) begin
      out1 = f2_y0;  out2 = f2_y1;    out2_im = '0;
      out3 = '0;     out4 = '0;       out4_im = '0;
    end else begin
      out1 = f4_x0;  out2 = f4_x1_re; out2_im = f4_x1_im;
      out3 = f4_x2;  out4 = f4_x3_re; out4_im = f4_x3_im;
    end
  end
endmodule
