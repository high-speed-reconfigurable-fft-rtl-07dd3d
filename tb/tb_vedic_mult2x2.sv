// tb_vedic_mult2x2: exhaustive self-checking test of the 2x2 Vedic multiplier.
// All 16 operand pairs are applied and the product is compared with the
// integer product a*b. Combinational block: each vector settles in one time step.
module tb_vedic_mult2x2;
  logic [1:0] a, b;
  logic [3:0] p;
  int checks = 0, failures = 0;

  vedic_mult2x2 dut (.a(a), .b(b), .p(p));

  initial begin : watchdog
    #5_000_000;  // time steps; every vector takes one
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) begin
        a = 2'(i); b = 2'(j);
        #1;
        checks++;
        if (p != 4'(i * j)) begin
          failures++;
          $display("FAIL %0d*%0d: got %0d", i, j, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
