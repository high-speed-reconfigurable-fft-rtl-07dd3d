// tb_fft4: self-checking test of the 4-point FFT.
// Three kinds of checks:
//  1. the published test vector (inputs 0, 2, 1, 3, w0 = w1 = 1) against the
//     six printed output values;
//  2. with w0 = w1 = 1 and random 4-bit samples, against a direct 4-point DFT
//     sum X(k) = sum_n x(n) j^(nk), inputs taken in bit-reversed order
//     (i1 = x0, i2 = x2, i3 = x1, i4 = x3);
//  3. random 8-bit inputs and random 4-bit twiddles against the two-stage
//     butterfly equations in integer arithmetic, modulo 256.
// Each vector settles in one time step (combinational block).
module tb_fft4;
  localparam int W = 8;
  logic [W-1:0] i1, i2, i3, i4;
  logic [3:0]   w0, w1;
  logic [W-1:0] x0, x1_re, x1_im, x2, x3_re, x3_im;
  int checks = 0, failures = 0;

  fft4 #(.DATA_W(W)) dut (
    .i1(i1), .i2(i2), .i3(i3), .i4(i4), .w0(w0), .w1(w1),
    .x0(x0), .x1_re(x1_re), .x1_im(x1_im), .x2(x2), .x3_re(x3_re), .x3_im(x3_im));

  initial begin : watchdog
    #5_000_000;  // time steps; every vector takes one
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what, int e0, int e1r, int e1i, int e2, int e3r, int e3i);
    checks++;
    if (x0 != W'(e0) || x1_re != W'(e1r) || x1_im != W'(e1i) ||
        x2 != W'(e2) || x3_re != W'(e3r) || x3_im != W'(e3i)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: got %0d %0d %0d %0d %0d %0d, expected %0d %0d %0d %0d %0d %0d", what,
                 $signed(x0), $signed(x1_re), $signed(x1_im), $signed(x2), $signed(x3_re),
                 $signed(x3_im), e0, e1r, e1i, e2, e3r, e3i);
    end
  endtask

  initial begin
    int s [4];
    int a, b, c, d, t0, t1;
    // 1. published waveform, 4-point mode
    i1 = 8'd0; i2 = 8'd2; i3 = 8'd1; i4 = 8'd3; w0 = 4'd1; w1 = 4'd1;
    #1;
    // printed: 00000110 11111110 11111110 11111110 11111110 00000010
    compare("published vector", 6, -2, -2, -2, -2, 2);

    // 2. direct DFT with unit twiddles
    for (int n = 0; n < 2000; n++) begin
      int re [4], im [4];
      for (int k = 0; k < 4; k++) s[k] = int'($urandom_range(0, 15));
      // s[] is x(0..3) in natural order
      for (int k = 0; k < 4; k++) begin
        re[k] = 0; im[k] = 0;
        for (int m = 0; m < 4; m++) begin
          case ((m * k) % 4)  // j^(mk)
            0: re[k] += s[m];
            1: im[k] += s[m];
            2: re[k] -= s[m];
            default: im[k] -= s[m];
          endcase
        end
      end
      i1 = W'(s[0]); i2 = W'(s[2]); i3 = W'(s[1]); i4 = W'(s[3]);
      w0 = 4'd1; w1 = 4'd1;
      #1;
      if (im[0] != 0 || im[2] != 0) begin
        failures++;
        $display("reference error");
      end
      compare("dft", re[0], re[1], im[1], re[2], re[3], im[3]);
    end

    // 3. butterfly equations, any operands and twiddles
    for (int n = 0; n < 50000; n++) begin
      for (int k = 0; k < 4; k++) s[k] = int'($urandom_range(0, 255));
      t0 = int'($urandom_range(0, 15));
      t1 = int'($urandom_range(0, 15));
      i1 = W'(s[0]); i2 = W'(s[1]); i3 = W'(s[2]); i4 = W'(s[3]);
      w0 = 4'(t0); w1 = 4'(t1);
      a = s[0] + t0 * s[1];
      b = s[0] - t0 * s[1];
      c = s[2] + t0 * s[3];
      d = s[2] - t0 * s[3];
      #1;
      compare("butterfly", a + t0 * c, b, t1 * d, a - t0 * c, b, -(t1 * d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
