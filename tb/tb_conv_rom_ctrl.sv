// tb_conv_rom_ctrl: self-checking test of the convolution weight ROM control.
//
// After reset the weight bank is zero, so every w[k][j] must read 0. A
// single load pulse must then make all 256 weights readable at once, each
// equal to the default table bpn_pkg::conv_w_default(k, j), and the values
// must stay after load returns low.
module tb_conv_rom_ctrl;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, load;
  logic [1:0] kernel;
  logic [5:0] tap;
  fx16_t w;
  int nonzero = 0;

  conv_rom_ctrl dut (.clk(clk), .rst_n(rst_n), .load(load), .kernel(kernel), .tap(tap), .weight_o(w));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep(bit expect_zero);
    for (int k = 0; k < 4; k++) for (int j = 0; j < 64; j++) begin
      fx16_t e;
      kernel = 2'(k); tap = 6'(j);
      #1;
      e = expect_zero ? fx16_t'(0) : conv_w_default(k, j);
      if (!expect_zero && e != 0) nonzero++;
      checks++;
      if (w !== e) begin failures++; if (failures < 10) $display("k=%0d j=%0d got %0d exp %0d", k, j, w, e); end
    end
  endtask

  initial begin
    rst_n = 0; load = 0; kernel = 0; tap = 0;
    #12 rst_n = 1;
    @(negedge clk);
    sweep(1);
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    sweep(0);
    repeat (3) @(negedge clk);
    sweep(0);
    checks++;
    if (nonzero < 400) begin failures++; $display("table mostly zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
