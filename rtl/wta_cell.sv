// wta_cell: behavioural model of the two-input current-mode winner-takes-all
// cell (analog circuit).
//
// The circuit mirrors both input currents onto nodes at equal voltage; the
// cross-coupled PMOS pair steers the excess |I1 - I2| into one branch while
// the smaller current min(I1, I2) flows in the other, and the two are copied
// out and added: Imax = min(I1, I2) + |I1 - I2| = max(I1, I2). The model
// computes exactly those two terms and adds them, then delays the output by
// the cell's settling time of 0.08 ns. The 0.25 % output offset of the
// circuit is not modelled. Currents are integers in unit cell currents.
module wta_cell #(
  parameter int unsigned CUR_W      = 13,
  parameter realtime     LATENCY_NS = 0.08
) (
  input  logic [CUR_W-1:0] i1,
  input  logic [CUR_W-1:0] i2,
  output logic [CUR_W-1:0] i_max
);

  timeunit 1ns;
  timeprecision 1ps;

  logic [CUR_W-1:0] i_min;   // current copied to I_X
  logic [CUR_W-1:0] i_extra; // current copied to I_Y

  always_comb begin
    i_min   = (i1 < i2) ? i1 : i2;
    i_extra = (i1 > i2) ? i1 - i2 : i2 - i1;
  end

  assign #(LATENCY_NS) i_max = i_min + i_extra;

endmodule
