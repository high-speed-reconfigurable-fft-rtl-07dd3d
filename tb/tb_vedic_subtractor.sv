// tb_vedic_subtractor: exhaustive self-checking test of the 8-bit subtractor.
// Every (a, b) pair is applied; diff is compared with (a - b) mod 256 and
// borrow with (a < b) for unsigned operands. Each vector settles in one time step.
module tb_vedic_subtractor;
  localparam int W = 8;
  logic [W-1:0] a, b, diff;
  logic         borrow;
  int checks = 0, failures = 0;

  vedic_subtractor #(.WIDTH(W)) dut (.a(a), .b(b), .diff(diff), .borrow(borrow));

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
        a = W'(i); b = W'(j);
        #1;
        checks++;
        if (diff != W'(i - j) || borrow != (i < j)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d-%0d: got %0d borrow %0b", i, j, diff, borrow);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
