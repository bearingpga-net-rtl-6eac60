// tb_fft_quant: self-checking test of the FFT output rescaling.
//
// For FFT values whose scaled result stays in range, the output must be
// floor(x / 1024): x has 12 fraction bits, the scale is 1/2048 and the
// output 13 fraction bits, so x * 2^-12 / 2048 * 2^13 = x / 1024. A set of
// hand-picked values (zero, one LSB, exact powers, negative values) and
// random values in range are checked, then values large enough to wrap
// the 16-bit (1,1,14) stage, whose expected result is the two's-complement
// wrap of floor(x / 512), halved.
module tb_fft_quant;
  int checks = 0, failures = 0;
  logic signed [27:0] x;
  logic signed [15:0] y;

  fft_quant dut (.fft_i(x), .x_o(y));

  function automatic longint floordiv(longint n, longint d);
    longint q;
    q = n / d;
    if ((n % d != 0) && ((n < 0) != (d < 0))) q = q - 1;
    return q;
  endfunction

  task automatic check(longint xv, longint e);
    x = 28'(xv);
    #1;
    checks++;
    if (y !== 16'(e)) begin
      failures++;
      if (failures < 10) $display("x=%0d got %0d exp %0d", xv, y, e);
    end
  endtask

  initial begin
    // 1.0 in (1,15,12) = 4096 -> 1/2048 in (1,2,13) = 4
    check(4096, 4);
    check(0, 0);
    check(1023, 0);
    check(1024, 1);
    check(-1, -1);
    check(-1024, -1);
    check(-1025, -2);
    check(2048 * 4096, 8192);          // magnitude 2048 -> 1.0
    for (int i = 0; i < 3000; i++) begin
      longint xv;
      xv = longint'($signed($urandom)) >>> 8;   // |x| < 2^23
      check(xv, floordiv(xv, 1024));
    end
    for (int i = 0; i < 500; i++) begin
      longint xv, q14;
      xv = longint'($signed($urandom)) >>> 5;   // |x| < 2^26: (1,1,14) wraps
      q14 = floordiv(xv, 512) & 64'hFFFF;
      if (q14 >= 32768) q14 -= 65536;
      check(xv, floordiv(q14, 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
