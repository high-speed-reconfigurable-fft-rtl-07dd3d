// vedic_subtractor: WIDTH-bit two's-complement subtractor, diff = a - b.
//
// The subtractor named among the building blocks of the Vedic FFT. Only its
// name is given; it is built as a - b = a + ~b + 1 on a vedic_adder, the
// simplest form. borrow is set when a < b read as unsigned numbers (the
// inverted carry out of the adder).
//
// Interface: a, b -> diff (WIDTH bits, modulo 2^WIDTH), borrow. Combinational.
module vedic_subtractor #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] diff,
  output logic             borrow
);
  logic [WIDTH-1:0] b_inv;
  logic             carry;

  assign b_inv  = ~b;
  assign borrow = ~carry;

  vedic_adder #(.WIDTH(WIDTH)) u_add (
    .a    (a),
    .b    (b_inv),
    .cin  (1'b1),
    .sum  (diff),
    .cout (carry)
  );
endmodule
