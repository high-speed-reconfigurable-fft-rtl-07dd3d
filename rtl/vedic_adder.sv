// vedic_adder: WIDTH-bit binary adder with carry in and carry out.
//
// The adder named among the building blocks of the Vedic FFT. Only its name is
// given, so it is written as the simplest circuit that adds: a ripple-carry
// chain of full adders, sum_i = a_i ^ b_i ^ c_i and c_{i+1} = majority(a_i,
// b_i, c_i), column by column from the least significant bit, which is the
// Urdhva column rule with one-bit digits and a one-bit carry.
//
// Interface: a, b, cin -> sum (WIDTH bits), cout. Combinational. Used for
// two's-complement addition (sum wraps modulo 2^WIDTH) and, through
// vedic_subtractor, for subtraction.
module vedic_adder #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  always_comb begin
    logic c;
    c = cin;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      sum[i] = a[i] ^ b[i] ^ c;
      c      = (a[i] & b[i]) | (a[i] & c) | (b[i] & c);
    end
    cout = c;
  end
endmodule
