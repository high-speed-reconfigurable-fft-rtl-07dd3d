// tw_mult: multiplies a DATA_W-bit two's-complement butterfly operand by a
// 4-bit unsigned twiddle coefficient and keeps the low DATA_W bits of the
// product, using only 4x4 Vedic multipliers.
//
// The operand is cut into 4-bit nibbles x = sum_i x_i * 16^i. Each nibble is
// multiplied by the twiddle in a vedic_mult4x4, the partial product of nibble
// i is shifted left by 4*i and the shifted products are summed on vedic_adder
// instances. Modulo 2^DATA_W the unsigned product of the bit pattern of x
// equals the signed product, so no sign handling is needed: the result is
// (x * w) mod 2^DATA_W, read as two's complement.
//
// Interface: x (DATA_W bits), w (4 bits) -> y (DATA_W bits). Combinational.
// The paper states that the FFT is built on 4x4 Vedic multipliers; how a wider
// butterfly operand is fed through them (nibble splitting) is this design's
// own choice. DATA_W must be a multiple of 4.
module tw_mult #(
  parameter int unsigned DATA_W = fft_pkg::DATA_W
) (
  input  logic [DATA_W-1:0] x,
  input  logic [3:0]        w,
  output logic [DATA_W-1:0] y
);
  localparam int unsigned NIB = DATA_W / 4;

  if (DATA_W % 4 != 0 || DATA_W < 4) begin : g_bad_width
    $error("tw_mult: DATA_W must be a positive multiple of 4");
  end

  logic [7:0]        pp      [NIB];     // nibble partial products
  logic [DATA_W-1:0] shifted [NIB];     // aligned and truncated
  logic [DATA_W-1:0] acc     [NIB];     // running sum
  logic [NIB-1:0]    unused_cout;

  for (genvar i = 0; i < NIB; i++) begin : g_nib
    vedic_mult4x4 u_mul (.a(x[4*i +: 4]), .b(w), .p(pp[i]));
    assign shifted[i] = DATA_W'({{DATA_W{1'b0}}, pp[i]} << (4 * i));
    if (i == 0) begin : g_first
      assign acc[0]         = shifted[0];
      assign unused_cout[0] = 1'b0;
    end else begin : g_rest
      vedic_adder #(.WIDTH(DATA_W)) u_add (
        .a(acc[i-1]), .b(shifted[i]), .cin(1'b0), .sum(acc[i]), .cout(unused_cout[i]));
    end
  end

  assign y = acc[NIB-1];
endmodule
