// tb_cnash_top: end-to-end test of the C-Nash solver on two small games.
//  - Battle of the Sexes, 2 x 2, M = [3 0; 0 2], N = [2 0; 0 3], I = 4: the
//    two pure equilibria are representable; every run must end at one.
//  - Rock-paper-scissors with payoffs shifted to 0..2 (win 2, draw 1, lose
//    0), 3 x 3, I = 3: its only equilibrium is the mixed one (1/3, 1/3, 1/3)
//    for both players, so this run exercises mixed strategies.
// Each game is driven by cnash_game_run, which checks the datapath every
// clock and the Nash conditions after every run.
module tb_cnash_top;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0;
  int c0, f0, c1, f1;
  bit d0, d1;

  always #5 clk = ~clk;

  cnash_game_run #(.N(2), .M(2), .I(4), .T(4),
                   .GAME(0),
                   .RUNS(8), .ALPHA(65505), .MIN_NE(8), .NAME("battle of the sexes"))
    g_bos (.clk(clk), .checks(c0), .failures(f0), .finished(d0));

  cnash_game_run #(.N(3), .M(3), .I(3), .T(2),
                   .GAME(1),
                   .RUNS(6), .T_MAX(20 << cnash_pkg::T_FRAC), .T_MIN(1 << (cnash_pkg::T_FRAC - 4)), .ALPHA(65511), .MIN_NE(3),
                   .NAME("rock-paper-scissors"))
    g_rps (.clk(clk), .checks(c1), .failures(f1), .finished(d1));

  initial begin
    #20ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
