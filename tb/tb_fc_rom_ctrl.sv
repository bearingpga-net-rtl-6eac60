// tb_fc_rom_ctrl: self-checking test of the FC weight ROM control.
//
// Rows are requested in a random order; each row's ten weights must
// appear one clock after the request and equal
// bpn_pkg::fc_w_default(r, c), and must be held while rd_en is low.
module tb_fc_rom_ctrl;
  import bpn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en;
  logic [7:0] row;
  fx16_t w [10];

  fc_rom_ctrl dut (.clk(clk), .rd_en(rd_en), .row(row), .weights_o(w));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(int r);
    for (int c = 0; c < 10; c++) begin
      checks++;
      if (w[c] !== fc_w_default(r, c)) begin failures++; if (failures < 10) $display("r=%0d c=%0d got %0d exp %0d", r, c, w[c], fc_w_default(r, c)); end
    end
  endtask

  initial begin
    int r, prev;
    rd_en = 0; row = 0;
    prev = -1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      r = (n < 256) ? n : $urandom_range(0, 255);
      row = 8'(r); rd_en = 1;
      @(negedge clk);
      rd_en = 0; row = 8'($urandom);
      check_row(r);             // one clock after the request
      @(negedge clk);
      check_row(r);             // held with rd_en low
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
