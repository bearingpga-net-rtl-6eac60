// tb_conv_layer: self-checking test of the 128-unit convolution.
//
// For each of the four kernels the units are cleared, then 64 MAC cycles
// apply random window points and one random weight per cycle (a few idle
// cycles with mac_en low are mixed in and must not change the sums). The
// outputs are compared with a reference computed here:
//   z_i = wrap16( sum_j wrap16(floor(s_ij * w_j / 2^13)) + b_k )
// with the kernel bias from bpn_pkg::conv_b_default. The number of MAC
// cycles per kernel (64) and per layer (256) is counted.
module tb_conv_layer;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, clear, mac_en;
  logic [1:0] kernel;
  fx16_t seg [128];
  fx16_t w;
  fx16_t z [128];
  longint acc [128];
  int mac_cycles = 0;

  conv_layer dut (.clk(clk), .rst_n(rst_n), .clear(clear), .mac_en(mac_en), .kernel(kernel),
                  .seg_i(seg), .weight_i(w), .z_o(z));

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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; mac_en = 0; kernel = 0; w = 0;
    foreach (seg[i]) seg[i] = 0;
    #12 rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        kernel = 2'(k);
        clear = 1; mac_en = 0;
        @(negedge clk);
        clear = 0;
        foreach (acc[i]) acc[i] = 0;
        for (int j = 0; j < 64; j++) begin
          if ($urandom_range(0, 9) == 0) begin
            // idle cycle: random data must be ignored
            mac_en = 0; w = fx16_t'($urandom);
            foreach (seg[i]) seg[i] = fx16_t'($urandom);
            @(negedge clk);
          end
          mac_en = 1;
          w = fx16_t'($urandom) >>> (round == 0 ? 4 : 0);
          foreach (seg[i]) seg[i] = fx16_t'($urandom) >>> (round == 0 ? 3 : 0);
          foreach (acc[i]) acc[i] = wrap16(acc[i] + wrap16(floordiv(longint'(seg[i]) * longint'(w), 8192)));
          mac_cycles++;
          @(negedge clk);
        end
        mac_en = 0;
        #1;
        for (int i = 0; i < 128; i++) begin
          longint e;
          e = wrap16(acc[i] + longint'(conv_b_default(k)));
          checks++;
          if (z[i] !== 16'(e)) begin failures++; if (failures < 10) $display("k=%0d i=%0d got %0d exp %0d", k, i, z[i], e); end
        end
      end
    end
    checks++;
    if (mac_cycles != 3 * 256) begin failures++; $display("mac cycles %0d", mac_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
