// vedic_mult4x4: 4x4-bit unsigned Vedic multiplier made of four 2x2 Vedic
// multipliers, as the design prescribes.
//
// The operands are split into 2-bit digits, a = {aH,aL}, b = {bH,bL}, and the
// Urdhva Tiryakbhyam rule is applied to those digits (radix 4):
//   column 0, vertical  : aL*bL             -> p[1:0], carry c0 (2 bits)
//   column 1, crosswise : aH*bL + aL*bH + c0 -> p[3:2], carry c1 (3 bits)
//   column 2, vertical  : aH*bH + c1        -> p[7:4]
// The four digit products come from vedic_mult2x2 instances and the column
// sums from vedic_adder instances. The largest product, 15*15 = 225, fits in
// the eight output bits, so the last column needs no carry out.
//
// Interface: a, b (4 bits), p = a*b (8 bits). Combinational, no clock.
// The split into four 2x2 multipliers follows the paper; the widths of the
// column adders are this design's own.
module vedic_mult4x4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p
);
  logic [3:0] q_ll, q_hl, q_lh, q_hh;   // digit products
  logic [4:0] xsum, col1;              // crosswise partial sum, full column-1 sum
  logic [3:0] col2;                     // last vertical column
  logic       unused_c0, unused_c1, unused_c2;

  vedic_mult2x2 u_ll (.a(a[1:0]), .b(b[1:0]), .p(q_ll));
  vedic_mult2x2 u_hl (.a(a[3:2]), .b(b[1:0]), .p(q_hl));
  vedic_mult2x2 u_lh (.a(a[1:0]), .b(b[3:2]), .p(q_lh));
  vedic_mult2x2 u_hh (.a(a[3:2]), .b(b[3:2]), .p(q_hh));

  // column 1: the two crosswise products, then the carry of column 0
  vedic_adder #(.WIDTH(5)) u_cross (
    .a({1'b0, q_hl}), .b({1'b0, q_lh}), .cin(1'b0), .sum(xsum), .cout(unused_c0));
  vedic_adder #(.WIDTH(5)) u_col1 (
    .a(xsum), .b({3'b000, q_ll[3:2]}), .cin(1'b0), .sum(col1), .cout(unused_c1));

  // column 2: vertical product of the high digits plus the carry of column 1
  vedic_adder #(.WIDTH(4)) u_col2 (
    .a(q_hh), .b({1'b0, col1[4:2]}), .cin(1'b0), .sum(col2), .cout(unused_c2));

  assign p = {col2, col1[1:0], q_ll[1:0]};
endmodule
