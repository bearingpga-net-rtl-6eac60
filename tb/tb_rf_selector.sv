// tb_rf_selector: self-checking test of the receptive-field selector.
//
// A random 1024-point spectrum is written, then for every tap j = 0..63
// all 128 window outputs are compared with spectrum[8*i + j - 28], or 0
// in the padding. This checks the stride, window length and padding.
module tb_rf_selector;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en;
  logic [9:0] wr_addr;
  fx16_t wr_data;
  logic [5:0] tap;
  fx16_t seg [128];
  fx16_t spec [1024];
  int zeros = 0;

  rf_selector dut (.clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data), .tap(tap), .seg_o(seg));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; tap = 0;
    for (int a = 0; a < 1024; a++) begin
      spec[a] = fx16_t'($urandom) | 16'h0001;   // never zero
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(a); wr_data = spec[a];
    end
    @(negedge clk); wr_en = 0;
    for (int j = 0; j < 64; j++) begin
      tap = 6'(j);
      #1;
      for (int i = 0; i < 128; i++) begin
        int idx;
        fx16_t e;
        idx = 8 * i + j - 28;
        e = (idx < 0 || idx > 1023) ? fx16_t'(0) : spec[idx];
        if (e == 0) zeros++;
        checks++;
        if (seg[i] !== e) begin failures++; if (failures < 10) $display("i=%0d j=%0d got %h exp %h", i, j, seg[i], e); end
      end
    end
    // every padded position must have read as zero
    checks++;
    begin
      int z2 = 0;
      for (int j = 0; j < 64; j++) for (int i = 0; i < 128; i++) if (8*i+j-28 < 0 || 8*i+j-28 > 1023) z2++;
      if (zeros != z2 || z2 == 0) begin failures++; $display("padding count %0d vs %0d", zeros, z2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
