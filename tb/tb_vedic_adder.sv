// tb_vedic_adder: exhaustive self-checking test of the 8-bit adder.
// Every (a, b, cin) combination is applied; {cout, sum} is compared with the
// integer a + b + cin. Combinational block: each vector settles in one time step.
module tb_vedic_adder;
  localparam int W = 8;
  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  int checks = 0, failures = 0;

  vedic_adder #(.WIDTH(W)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #5_000_000;  // time steps; every vector takes one
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**W; i++) begin
      for (int j = 0; j < 2**W; j++) begin
        for (int k = 0; k < 2; k++) begin
          a = W'(i); b = W'(j); cin = 1'(k);
          #1;
          checks++;
          if ({cout, sum} != (W+1)'(i + j + k)) begin
            failures++;
            if (failures < 10) $display("FAIL %0d+%0d+%0d: got %0d", i, j, k, {cout, sum});
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
