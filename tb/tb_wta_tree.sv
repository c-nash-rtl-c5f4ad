// tb_wta_tree: checks the WTA tree with D = 5 inputs (K = 3 levels, 7 cells,
// three zero-current pad leaves) and D = 8: the settled output is the largest
// input while enabled and zero while disabled; with en high the D = 8 tree
// settles within K cell delays (3 x 0.08 ns).
module tb_wta_tree;
  timeunit 1ns; timeprecision 1ps;
  int checks = 0, failures = 0;
  logic        en = 0;
  logic [12:0] in5 [5];
  logic [12:0] in8 [8];
  logic [12:0] out5, out8;

  wta_tree #(.D(5), .CUR_W(13)) dut5 (.en(en), .i_in(in5), .i_max(out5));
  wta_tree #(.D(8), .CUR_W(13)) dut8 (.en(en), .i_in(in8), .i_max(out8));

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
    int m5, m8;
    check(dut5.CELLS == 7, "7 cells for 5 inputs");
    check(dut8.CELLS == 7, "7 cells for 8 inputs");
    for (int n = 0; n < 300; n++) begin
      en = (n % 7 != 3);
      m5 = 0; m8 = 0;
      for (int k = 0; k < 5; k++) begin in5[k] = 13'($urandom_range(0, 4095)); if (in5[k] > m5) m5 = in5[k]; end
      for (int k = 0; k < 8; k++) begin in8[k] = 13'($urandom_range(0, 4095)); if (in8[k] > m8) m8 = in8[k]; end
      #0.25;
      check(int'(out8) == (en ? m8 : 0), $sformatf("D=8 settled within 3 cell delays: %0d vs %0d", out8, m8));
      #1;
      check(int'(out5) == (en ? m5 : 0), $sformatf("D=5 max %0d vs %0d", out5, m5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
