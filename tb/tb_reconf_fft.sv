// tb_reconf_fft: end-to-end self-checking test of the reconfigurable FFT at
// its default sizes (4-bit samples and twiddles, 8-bit outputs).
//
//  1. The published waveform: inputs 0, 2, 1, 3, w0 = w1 = 1, first with
//     select = 0 (2-point: out1 = 00000010, out2 = 11111110) and then with
//     select = 1 (4-point: 00000110, 11111110, 11111110, 11111110, 11111110,
//     00000010 on out1, out2, out2_im, out3, out4, out4_im).
//  2. Every 2-point input combination (in1, in2, w0), with in3, in4, w1 random.
//  3. Random vectors with a random select on each, so the transform length
//     changes at run time many times in both directions.
// Expected values come from the butterfly equations in integer arithmetic,
// reduced modulo 256; in 2-point mode the 4-point-only outputs must be 0.
// Counted mechanisms, each of which must occur: 2-point operation, 4-point
// operation, a 2->4 and a 4->2 length switch, and wrap-around of a result
// outside -128..127. Isolation of the idle unit (its inputs all zero) is
// checked on every vector by an assertion inside reconf_fft, which stops the
// simulation with an error if it is ever violated. Each vector settles in one
// time step.
module tb_reconf_fft;
  import fft_pkg::*;

  sample_t  in1, in2, in3, in4;
  twiddle_t w0, w1;
  logic     select;
  data_t    out1, out2, out2_im, out3, out4, out4_im;

  int checks = 0, failures = 0;
  int n_fft2 = 0, n_fft4 = 0, n_sw24 = 0, n_sw42 = 0, n_wrap = 0;
  logic prev_select = 1'b0;
  bit   first = 1'b1;

  reconf_fft dut (
    .in1(in1), .in2(in2), .in3(in3), .in4(in4), .w0(w0), .w1(w1), .select(select),
    .out1(out1), .out2(out2), .out2_im(out2_im), .out3(out3), .out4(out4), .out4_im(out4_im));

  initial begin : watchdog
    #5_000_000;  // time steps; every vector takes one
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit wraps(int v);
    return v < -128 || v > 127;
  endfunction

  // apply one vector, wait for it to settle and check all outputs
  task automatic apply(int a1, int a2, int a3, int a4, int t0, int t1, bit sel);
    int e [6];
    int a, b, c, d;
    in1 = sample_t'(a1); in2 = sample_t'(a2); in3 = sample_t'(a3); in4 = sample_t'(a4);
    w0 = twiddle_t'(t0); w1 = twiddle_t'(t1); select = sel;
    #1;
    if (!sel) begin
      e = '{a1 + t0 * a2, a1 - t0 * a2, 0, 0, 0, 0};
      n_fft2++;
    end else begin
      a = a1 + t0 * a2; b = a1 - t0 * a2;
      c = a3 + t0 * a4; d = a3 - t0 * a4;
      e = '{a + t0 * c, b, t1 * d, a - t0 * c, b, -(t1 * d)};
      n_fft4++;
    end
    foreach (e[k]) if (wraps(e[k])) begin n_wrap++; break; end
    if (!first && prev_select == 1'b0 && sel == 1'b1) n_sw24++;
    if (!first && prev_select == 1'b1 && sel == 1'b0) n_sw42++;
    first = 1'b0;
    prev_select = sel;
    checks++;
    if (out1 != data_t'(e[0]) || out2 != data_t'(e[1]) || out2_im != data_t'(e[2]) ||
        out3 != data_t'(e[3]) || out4 != data_t'(e[4]) || out4_im != data_t'(e[5])) begin
      failures++;
      if (failures < 10)
        $display("FAIL sel=%0b in=%0d,%0d,%0d,%0d w=%0d,%0d: got %0d %0d %0d %0d %0d %0d exp %0d %0d %0d %0d %0d %0d",
                 sel, a1, a2, a3, a4, t0, t1, out1, out2, out2_im, out3, out4, out4_im,
                 e[0], e[1], e[2], e[3], e[4], e[5]);
    end
  endtask

  initial begin
    // 1. published waveform: 2-point, then 4-point
    apply(0, 2, 1, 3, 1, 1, 1'b0);
    checks++;
    if (out1 != 8'b00000010 || out2 != 8'b11111110) begin
      failures++;
      $display("FAIL published 2-point values: %b %b", out1, out2);
    end
    apply(0, 2, 1, 3, 1, 1, 1'b1);
    checks++;
    if (out1 != 8'b00000110 || out2 != 8'b11111110 || out2_im != 8'b11111110 ||
        out3 != 8'b11111110 || out4 != 8'b11111110 || out4_im != 8'b00000010) begin
      failures++;
      $display("FAIL published 4-point values: %b %b %b %b %b %b",
               out1, out2, out2_im, out3, out4, out4_im);
    end

    // 2. all 2-point input combinations
    for (int t0 = 0; t0 < 16; t0++)
      for (int a1 = 0; a1 < 16; a1++)
        for (int a2 = 0; a2 < 16; a2++)
          apply(a1, a2, int'($urandom_range(0, 15)), int'($urandom_range(0, 15)), t0,
                int'($urandom_range(0, 15)), 1'b0);

    // 3. random vectors, random transform length
    for (int n = 0; n < 200000; n++)
      apply(int'($urandom_range(0, 15)), int'($urandom_range(0, 15)),
            int'($urandom_range(0, 15)), int'($urandom_range(0, 15)),
            int'($urandom_range(0, 15)), int'($urandom_range(0, 15)), 1'($urandom_range(0, 1)));

    $display("mechanisms: fft2=%0d fft4=%0d switch2to4=%0d switch4to2=%0d wrap=%0d",
             n_fft2, n_fft4, n_sw24, n_sw42, n_wrap);
    checks++;
    if (n_fft2 == 0 || n_fft4 == 0 || n_sw24 == 0 || n_sw42 == 0 || n_wrap == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
