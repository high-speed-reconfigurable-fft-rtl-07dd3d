// tb_vedic_mult4x4: exhaustive self-checking test of the 4x4 Vedic multiplier.
// All 256 operand pairs are applied and the 8-bit product is compared with the
// integer product a*b. Combinational block: each vector settles in one time step.
module tb_vedic_mult4x4;
  logic [3:0] a, b;
  logic [7:0] p;
  int checks = 0, failures = 0;

  vedic_mult4x4 dut (.a(a), .b(b), .p(p));

  initial begin : watchdog
    #5_000_000;  // time steps; every vector takes one
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin
        a = 4'(i); b = 4'(j);
        #1;
        checks++;
        if (p != 8'(i * j)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d*%0d: got %0d", i, j, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
