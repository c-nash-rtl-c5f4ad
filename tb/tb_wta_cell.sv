// tb_wta_cell: checks the 2-input WTA cell: the output is max(I1, I2) once
// settled, and it changes 0.08 ns after an input (still old at 0.05 ns, new
// at 0.11 ns).
module tb_wta_cell;
  timeunit 1ns; timeprecision 1ps;
  int checks = 0, failures = 0;
  logic [12:0] i1 = 0, i2 = 0, i_max;

  wta_cell #(.CUR_W(13)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [12:0] old, a, b, e;
    #1;
    for (int n = 0; n < 300; n++) begin
      old = i_max;
      a = 13'($urandom_range(0, 8191)); b = (n % 10 == 0) ? a : 13'($urandom_range(0, 8191));
      e = (a > b) ? a : b;
      i1 = a; i2 = b;
      #0.05;
      if (e != old) check(i_max == old, "output must not change before 0.08 ns");
      #0.06;
      check(i_max == e, $sformatf("max(%0d,%0d) gave %0d", a, b, i_max));
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
