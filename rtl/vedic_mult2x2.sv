// vedic_mult2x2: 2x2-bit unsigned multiplier by the Urdhva Tiryakbhyam
// ("vertically and crosswise") rule, the smallest brick of the Vedic multiplier.
//
// With a = {a1,a0} and b = {b1,b0} the rule works digit column by column:
//   column 0, vertical  : a0*b0                 -> p[0]
//   column 1, crosswise : a1*b0 + a0*b1         -> p[1], carry k
//   column 2, vertical  : a1*b1 + k             -> p[2], carry into p[3]
// Each one-bit digit product is an AND gate and each column sum a half adder,
// so the block is four AND gates and two half adders.
//
// Interface: a, b (2 bits), p = a*b (4 bits). Purely combinational, no clock.
// The rule itself is the one the paper describes for decimal digits and applies
// to binary; the gate-level mapping written here is this design's own.
module vedic_mult2x2 (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [3:0] p
);
  logic cross_a, cross_b, vert_hi, k;

  always_comb begin
    cross_a = a[1] & b[0];
    cross_b = a[0] & b[1];
    vert_hi = a[1] & b[1];
    k       = cross_a & cross_b;        // carry of the crosswise column
    p[0]    = a[0] & b[0];              // vertical, low digits
    p[1]    = cross_a ^ cross_b;        // crosswise column sum
    p[2]    = vert_hi ^ k;              // vertical, high digits, plus carry
    p[3]    = vert_hi & k;              // final carry
  end
endmodule
