// tb_relu_maxpool_layer: self-checking test of the fused ReLU / max-pool.
//
// Four kernels' worth of 128 values are written; each stored feature
// feat[k*64 + t] must equal max(0, z[2t], z[2t+1]) computed with ordinary
// signed arithmetic. Inputs are drawn so that all four sign cases of the
// algorithm (both negative, each mixed order, both non-negative, equal
// values, zero) occur, and each case is counted; a case that never occurs
// counts as a failure.
module tb_relu_maxpool_layer;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, vin;
  logic [1:0] kernel;
  fx16_t z [128];
  fx16_t feat [256];
  fx16_t expv [256];
  int n_negneg = 0, n_posneg = 0, n_negpos = 0, n_pospos = 0, n_tie = 0;

  relu_maxpool_layer dut (.clk(clk), .rst_n(rst_n), .in_valid(vin), .kernel(kernel), .z_i(z), .feat_o(feat));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; vin = 0; kernel = 0;
    foreach (z[i]) z[i] = 0;
    #12 rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        foreach (z[i]) z[i] = fx16_t'($urandom);
        for (int t = 0; t < 64; t++) begin
          fx16_t a, b, m;
          if ($urandom_range(0, 15) == 0) z[2*t+1] = z[2*t];
          if ($urandom_range(0, 31) == 0) z[2*t] = 0;
          a = z[2*t]; b = z[2*t+1];
          m = (a > b) ? a : b;
          if (m < 0) m = 0;
          expv[k*64 + t] = m;
          if (a < 0 && b < 0) n_negneg++;
          else if (a >= 0 && b < 0) n_posneg++;
          else if (a < 0 && b >= 0) n_negpos++;
          else n_pospos++;
          if (a == b && a >= 0) n_tie++;
        end
        kernel = 2'(k); vin = 1;
        @(negedge clk);
        vin = 0;
        foreach (z[i]) z[i] = fx16_t'($urandom);   // must be ignored
      end
      @(negedge clk);
      for (int i = 0; i < 256; i++) begin
        checks++;
        if (feat[i] !== expv[i]) begin failures++; if (failures < 10) $display("i=%0d got %0d exp %0d", i, feat[i], expv[i]); end
      end
    end
    checks++;
    if (n_negneg == 0 || n_posneg == 0 || n_negpos == 0 || n_pospos == 0 || n_tie == 0) begin
      failures++; $display("case missing");
    end
    $display("cases: both<0 %0d, x1>=0>x2 %0d, x1<0<=x2 %0d, both>=0 %0d, ties %0d",
             n_negneg, n_posneg, n_negpos, n_pospos, n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
