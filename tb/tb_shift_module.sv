// tb_shift_module: self-checking test of the binary-point shift.
//
// A (1,2,13) value x must become floor(x / 32) in (1,7,8); exact values
// such as 1.0 (8192 -> 256) and -1.0, and random values, are checked.
module tb_shift_module;
  import bpn_pkg::*;
  int checks = 0, failures = 0;
  fx16_t x, y;
  shift_module dut (.x_i(x), .y_o(y));

  task automatic check(int xv, int e);
    x = fx16_t'(xv);
    #1;
    checks++;
    if (y !== fx16_t'(e)) begin failures++; if (failures < 10) $display("x=%0d got %0d exp %0d", xv, y, e); end
  endtask

  initial begin
    check(8192, 256);
    check(-8192, -256);
    check(31, 0);
    check(-1, -1);
    check(32767, 1023);
    check(-32768, -1024);
    for (int i = 0; i < 2000; i++) begin
      int xv, e;
      xv = int'($signed(16'($urandom)));
      e = (xv >= 0) ? xv / 32 : -((-xv + 31) / 32);
      check(xv, e);
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
