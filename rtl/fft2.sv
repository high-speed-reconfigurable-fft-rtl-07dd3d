// fft2: 2-point FFT, i.e. one radix-2 decimation-in-time butterfly.
//
//   y0 = x0 + w * x1
//   y1 = x0 - w * x1
//
// w is the real twiddle coefficient W_2^0 (1 for a plain 2-point DFT) given as
// a 4-bit unsigned number. The product w*x1 comes from tw_mult (4x4 Vedic
// multipliers), the sum from a vedic_adder and the difference from a
// vedic_subtractor, the three Vedic blocks the FFT is said to be built from.
// All values are DATA_W-bit two's complement and wrap modulo 2^DATA_W.
//
// Interface: x0, x1 (DATA_W bits), w (4 bits) -> y0, y1 (DATA_W bits).
// Combinational: outputs follow inputs after the adder and multiplier delay,
// no clock. The butterfly equations are the standard 2-point DFT; the
// waveform published with the design (x0 = 0, x1 = 2, w = 1 gives 2 and -2)
// is reproduced. Widths and the wrap-around are this design's choice.
module fft2 #(
  parameter int unsigned DATA_W = fft_pkg::DATA_W
) (
  input  logic [DATA_W-1:0] x0,
  input  logic [DATA_W-1:0] x1,
  input  logic [3:0]        w,
  output logic [DATA_W-1:0] y0,
  output logic [DATA_W-1:0] y1
);
  logic [DATA_W-1:0] prod;
  logic              unused_cout, unused_borrow;

  tw_mult #(.DATA_W(DATA_W)) u_mul (.x(x1), .w(w), .y(prod));

  vedic_adder #(.WIDTH(DATA_W)) u_add (
    .a(x0), .b(prod), .cin(1'b0), .sum(y0), .cout(unused_cout));

  vedic_subtractor #(.WIDTH(DATA_W)) u_sub (
    .a(x0), .b(prod), .diff(y1), .borrow(unused_borrow));
endmodule
