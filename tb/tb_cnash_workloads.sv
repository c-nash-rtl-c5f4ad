// tb_cnash_workloads: the evaluated game sizes on the default-size solver
// (8 x 8 actions, I = 4, t = 4; the parameters below equal the defaults).
//  - Battle of the Sexes (2 actions) placed in the 8 x 8 array, with the six
//    unused actions of each player padded with strictly dominated payoffs,
//    annealed with about 10,000 iterations per run, the schedule length used
//    for this game. Every run must end at one of its two pure equilibria.
//  - A 3-action coordination game, padded the same way, with about 15,000
//    iterations per run. Its equilibria on the 1/4 grid are pure and
//    1/2-1/2 mixed ones; every run must end at one of them.
//  - The 8-action coordination game (every (k, k) an equilibrium) with about
//    50,000 iterations per run.
// All are checked clock by clock by cnash_game_run.
module tb_cnash_workloads;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0;
  int c0, f0, c1, f1, c2, f2;
  bit d0, d1, d2;

  always #5 clk = ~clk;

  cnash_game_run #(.N(8), .M(8), .I(4), .T(4), .GAME(3), .RUNS(6), .ALPHA(65505),
                   .MIN_NE(6), .NAME("battle of the sexes, 8 x 8 array"))
    g_bos (.clk(clk), .checks(c0), .failures(f0), .finished(d0));

  cnash_game_run #(.N(8), .M(8), .I(4), .T(4), .GAME(4), .RUNS(4), .ALPHA(65515),
                   .MIN_NE(4), .NAME("3-action game, 8 x 8 array"))
    g_three (.clk(clk), .checks(c2), .failures(f2), .finished(d2));

  cnash_game_run #(.N(8), .M(8), .I(4), .T(4), .GAME(2), .RUNS(3), .ALPHA(65530),
                   .MIN_NE(3), .NAME("8-action game"))
    g_big (.clk(clk), .checks(c1), .failures(f1), .finished(d1));

  initial begin
    #100ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
