// strategy_perturb: generates the neighbouring strategy of one player for the
// next annealing iteration.
//
// The new strategy moves one probability interval (1/I) from one action to
// another, so one probability is decremented and another incremented by the
// interval and the probabilities still sum to one. The source is the first
// action with a non-zero count at or after r_src mod ACT (cyclically); the
// destination is (src + 1 + r_dst mod (ACT-1)) mod ACT, always a different
// action. The destination cannot overflow, since its count is at most
// I - count(src) <= I - 1. Which actions are chosen and how is this design's
// choice. Combinational; needs ACT >= 2 and a strategy summing to I.
module strategy_perturb #(
  parameter int unsigned ACT   = 8,
  parameter int unsigned I_INT = 4,
  localparam int unsigned SW = $clog2(I_INT + 1)
) (
  input  logic [SW-1:0] strat   [ACT],
  input  logic [7:0]    r_src,
  input  logic [7:0]    r_dst,
  output logic [SW-1:0] strat_n [ACT]
);

  timeunit 1ns;
  timeprecision 1ps;

  int unsigned start, src, dst;
  logic        found;

  always_comb begin
    start = int'(r_src) % ACT;
    src   = start;
    found = 1'b0;
    for (int o = 0; o < ACT; o++) begin
      if (!found && strat[(start + o) % ACT] != '0) begin
        src   = (start + o) % ACT;
        found = 1'b1;
      end
    end
    dst = (src + 1 + int'(r_dst) % (ACT - 1)) % ACT;
    for (int a = 0; a < ACT; a++) strat_n[a] = strat[a];
    if (found) begin
      strat_n[src] = strat[src] - 1'b1;
      strat_n[dst] = strat[dst] + 1'b1;
    end
  end

endmodule
