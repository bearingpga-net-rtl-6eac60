// tb_processingElement16: self-checking test of the MAC unit.
//
// Two units are tested side by side, one with the convolution format
// (13 fraction bits) and one with the FC format (8 fraction bits). Random
// operands are applied for many cycles with occasional synchronous
// resets; a reference sum is kept with floor division and 16-bit wrap,
// and the result is compared every cycle. A run of zero operands checks
// that the unit holds its sum.
module tb_processingElement16;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic reset;
  logic signed [15:0] a, b;
  logic signed [15:0] r13, r8;
  longint ref13, ref8;

  processingElement16 #(.FRAC(13)) dut13 (.clk(clk), .reset(reset), .floatA(a), .floatB(b), .result(r13));
  processingElement16 #(.FRAC(8))  dut8  (.clk(clk), .reset(reset), .floatA(a), .floatB(b), .result(r8));

  function automatic longint floordiv(longint n, longint d);
    longint q;
    q = n / d;
    if ((n % d != 0) && ((n < 0) != (d < 0))) q = q - 1;
    return q;
  endfunction

  function automatic longint wrap16(longint v);
    longint m;
    m = v & 64'hFFFF;
    return (m >= 32768) ? m - 65536 : m;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1; a = 0; b = 0;
    @(posedge clk); #1;
    ref13 = 0; ref8 = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      // compare the registered result with the reference
      checks += 2;
      if (r13 !== 16'(ref13)) begin failures++; if (failures < 10) $display("FRAC13 cyc %0d: got %0d exp %0d", cyc, r13, ref13); end
      if (r8  !== 16'(ref8))  begin failures++; if (failures < 10) $display("FRAC8  cyc %0d: got %0d exp %0d", cyc, r8, ref8); end
      reset = ($urandom_range(0, 99) < 3);
      if (cyc >= 1000 && cyc < 1100) begin a = 16'($urandom); b = 0; end   // hold test
      else begin
        a = 16'($urandom); b = 16'($urandom);
        if ($urandom_range(0, 3) == 0) begin a = a >>> 4; b = b >>> 4; end
      end
      @(posedge clk); #1;
      if (reset) begin ref13 = 0; ref8 = 0; end
      else begin
        ref13 = wrap16(ref13 + wrap16(floordiv(longint'(a) * longint'(b), 8192)));
        ref8  = wrap16(ref8  + wrap16(floordiv(longint'(a) * longint'(b), 256)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
