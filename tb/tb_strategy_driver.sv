// tb_strategy_driver: checks the WL/DL thermometer drivers.
// A WL-style driver (3 actions, 1 line per step) and a DL-style driver (2
// actions, 4 lines per step) get random strategies; each line is compared with
// "line l is on iff all_on or its step index is below its action's count".
// Also checks the worked mapping example: p = 0.25 lights 1 of 4 rows and
// q = 0.75 lights 12 of 16 columns.
module tb_strategy_driver;
  timeunit 1ns; timeprecision 1ps;
  localparam int I = 4;
  int checks = 0, failures = 0;

  logic [2:0]  s_wl [3];
  logic [2:0]  s_dl [2];
  logic        on_wl, on_dl;
  logic [11:0] wl;
  logic [31:0] dl;

  strategy_driver #(.ACT(3), .I_INT(I), .CELLS_PER_STEP(1)) dut_wl (.strat(s_wl), .all_on(on_wl), .lines(wl));
  strategy_driver #(.ACT(2), .I_INT(I), .CELLS_PER_STEP(4)) dut_dl (.strat(s_dl), .all_on(on_dl), .lines(dl));

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
    // worked example
    s_wl = '{3'd1, 3'd0, 3'd0}; on_wl = 0;
    s_dl = '{3'd3, 3'd0};       on_dl = 0;
    #1;
    check(wl[3:0] == 4'b0001, "p=0.25 lights first of 4 rows");
    check($countones(dl[15:0]) == 12 && dl[11:0] == 12'hfff, "q=0.75 lights first 12 of 16 columns");
    for (int n = 0; n < 300; n++) begin
      for (int a = 0; a < 3; a++) s_wl[a] = 3'($urandom_range(0, I));
      for (int a = 0; a < 2; a++) s_dl[a] = 3'($urandom_range(0, I));
      on_wl = ($urandom_range(0, 3) == 0);
      on_dl = ($urandom_range(0, 3) == 0);
      #1;
      for (int l = 0; l < 12; l++)
        check(wl[l] == (on_wl || (l % I) < s_wl[l / I]), $sformatf("wl line %0d", l));
      for (int l = 0; l < 32; l++)
        check(dl[l] == (on_dl || ((l % 16) / 4) < s_dl[l / 16]), $sformatf("dl line %0d", l));
      check($countones(wl) == (on_wl ? 12 : s_wl[0] + s_wl[1] + s_wl[2]), "wl count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
