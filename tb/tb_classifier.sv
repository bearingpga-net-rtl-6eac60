// tb_classifier: self-checking test of the arg-max classification.
//
// Random signed logits (including all-negative sets and ties) are
// applied; the registered class must be the lowest index of the largest
// value, valid_o must follow valid_i by one clock, and the class must be
// held when valid_i is low.
module tb_classifier;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, vin, vout;
  fx16_t lg [10];
  logic [3:0] cls;
  int exp_cls;

  classifier dut (.clk(clk), .rst_n(rst_n), .valid_i(vin), .logits_i(lg), .class_o(cls), .valid_o(vout));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; vin = 0;
    foreach (lg[c]) lg[c] = 0;
    #12 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int c = 0; c < 10; c++) begin
        lg[c] = fx16_t'($urandom);
        if (n % 4 == 1) lg[c] = fx16_t'($urandom_range(0, 3));          // many ties
        if (n % 4 == 2) lg[c] = -fx16_t'($urandom_range(1, 30000));    // all negative
      end
      exp_cls = 0;
      for (int c = 1; c < 10; c++) if (lg[c] > lg[exp_cls]) exp_cls = c;
      vin = 1;
      @(negedge clk);
      vin = 0;
      checks += 2;
      if (!vout) begin failures++; $display("valid_o missing"); end
      if (cls !== 4'(exp_cls)) begin failures++; if (failures < 10) $display("n=%0d got %0d exp %0d", n, cls, exp_cls); end
      foreach (lg[c]) lg[c] = fx16_t'($urandom);
      @(negedge clk);
      checks += 2;
      if (vout) begin failures++; $display("valid_o stuck"); end
      if (cls !== 4'(exp_cls)) begin failures++; $display("class not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
