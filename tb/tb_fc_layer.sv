// tb_fc_layer: self-checking test of the fully-connected layer.
//
// The ten units are cleared, then 256 MAC cycles apply one random feature
// and one random row of ten weights per cycle, with idle cycles mixed in.
// Logit c must equal
//   wrap16( sum_r wrap16(floor(x_r * W[r][c] / 2^8)) + b_c )
// with b_c = bpn_pkg::fc_b_default(c); 256 MAC cycles per pass are counted.
module tb_fc_layer;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, clear, mac_en;
  fx16_t x;
  fx16_t w [10];
  fx16_t y [10];
  longint acc [10];
  int mac_cycles;

  fc_layer dut (.clk(clk), .rst_n(rst_n), .clear(clear), .mac_en(mac_en), .x_i(x), .w_i(w), .y_o(y));

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
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; mac_en = 0; x = 0;
    foreach (w[c]) w[c] = 0;
    #12 rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      foreach (acc[c]) acc[c] = 0;
      mac_cycles = 0;
      for (int r = 0; r < 256; r++) begin
        if ($urandom_range(0, 9) == 0) begin
          mac_en = 0; x = fx16_t'($urandom);
          foreach (w[c]) w[c] = fx16_t'($urandom);
          @(negedge clk);
        end
        mac_en = 1;
        x = fx16_t'($urandom) >>> (pass < 2 ? 6 : 0);
        foreach (w[c]) w[c] = fx16_t'($urandom) >>> (pass < 2 ? 6 : 0);
        foreach (acc[c]) acc[c] = wrap16(acc[c] + wrap16(floordiv(longint'(x) * longint'(w[c]), 256)));
        mac_cycles++;
        @(negedge clk);
      end
      mac_en = 0;
      #1;
      for (int c = 0; c < 10; c++) begin
        longint e;
        e = wrap16(acc[c] + longint'(fc_b_default(c)));
        checks++;
        if (y[c] !== 16'(e)) begin failures++; if (failures < 10) $display("c=%0d got %0d exp %0d", c, y[c], e); end
      end
      checks++;
      if (mac_cycles != 256) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
