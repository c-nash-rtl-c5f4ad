// strategy_driver: word-line / data-line driver of a C-Nash crossbar.
//
// A mixed strategy is held as integer counts k_a in 0..I_INT, meaning a
// probability of k_a / I_INT for action a. Each action owns I_INT steps of
// CELLS_PER_STEP consecutive lines; the driver activates the first k_a steps
// of action a (a thermometer code). Used as the WL driver (CELLS_PER_STEP = 1:
// k of I rows) and as the DL driver (CELLS_PER_STEP = t: k groups of t
// columns), as in the crossbar mapping where 0.25 lights 1 of 4 rows and 0.75
// lights 12 of 16 columns. all_on drives every line, which is how Phase 1
// sets the strategy applied to that port to the all-ones vector.
//
// Line index of action a, step s, cell c: (a*I_INT + s)*CELLS_PER_STEP + c.
// That the active steps are the lowest-numbered ones is this design's choice
// (the worked example lights the first row and the first columns). Counts
// above I_INT are treated as I_INT. Purely combinational; in silicon the
// outputs are voltage pulses on the lines.
module strategy_driver #(
  parameter int unsigned ACT            = 8,
  parameter int unsigned I_INT          = 4,
  parameter int unsigned CELLS_PER_STEP = 1,
  localparam int unsigned SW    = $clog2(I_INT + 1),
  localparam int unsigned LINES = ACT * I_INT * CELLS_PER_STEP
) (
  input  logic [SW-1:0]    strat [ACT],  // k_a, probability k_a / I_INT
  input  logic             all_on,       // drive every line (Phase 1 unit vector)
  output logic [LINES-1:0] lines         // 1 = line driven
);

  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    lines = '0;
    for (int a = 0; a < ACT; a++)
      for (int s = 0; s < I_INT; s++)
        for (int c = 0; c < CELLS_PER_STEP; c++)
          lines[(a*I_INT + s)*CELLS_PER_STEP + c] = all_on || (int'(strat[a]) > s);
  end

endmodule
