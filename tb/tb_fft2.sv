// tb_fft2: self-checking test of the 2-point FFT butterfly.
// Every x0, x1 (8-bit) and w (4-bit) combination is applied and the outputs
// are compared with y0 = x0 + w*x1 and y1 = x0 - w*x1 computed in integer
// arithmetic and reduced modulo 256. The published test vector (x0 = 0,
// x1 = 2, w = 1 -> 00000010, 11111110) is checked first. Each vector
// settles in one time step (combinational block).
module tb_fft2;
  localparam int W = 8;
  logic [W-1:0] x0, x1, y0, y1;
  logic [3:0]   w;
  int checks = 0, failures = 0;

  fft2 #(.DATA_W(W)) dut (.x0(x0), .x1(x1), .w(w), .y0(y0), .y1(y1));

  initial begin : watchdog
    #5_000_000;  // time steps; every vector takes one
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int a, int b, int tw);
    x0 = W'(a); x1 = W'(b); w = 4'(tw);
    #1;
    checks++;
    if (y0 != W'(a + tw * b) || y1 != W'(a - tw * b)) begin
      failures++;
      if (failures < 10)
        $display("FAIL x0=%0d x1=%0d w=%0d: y0=%0d y1=%0d", a, b, tw, y0, y1);
    end
  endtask

  initial begin
    // published waveform, 2-point mode
    x0 = 8'd0; x1 = 8'd2; w = 4'd1;
    #1;
    checks++;
    if (y0 != 8'b00000010 || y1 != 8'b11111110) begin
      failures++;
      $display("FAIL published vector: y0=%b y1=%b", y0, y1);
    end
    for (int tw = 0; tw < 16; tw++)
      for (int a = 0; a < 256; a++)
        for (int b = 0; b < 256; b++)
          check(a, b, tw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
