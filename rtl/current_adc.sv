// current_adc: behavioural model of the current-input ADC that digitises a
// crossbar or WTA output current (mixed-signal part).
//
// The code is floor(i_in / LSB), clipped at 2^ADC_BITS - 1 with overrange
// raised. Currents are in units of one cell ON current. The default is a
// 10-bit converter with an LSB of 4 cell currents; the solver instantiates it
// with LSB = 1 and 13 bits, which makes the conversion exact for a full
// 32 x 128 array (the SA logic relies on exact integers). The converter's
// architecture, resolution and timing are this design's assumptions (only
// the block's name is given); it is modelled as settling within one clock,
// so its output is combinational here.
module current_adc #(
  parameter int unsigned CUR_W    = 13,
  parameter int unsigned ADC_BITS = 10,
  parameter int unsigned LSB      = 4
) (
  input  logic [CUR_W-1:0]    i_in,      // input current, unit cell currents
  output logic [ADC_BITS-1:0] code,      // digital result
  output logic                overrange  // input above full scale
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned FULL = (1 << ADC_BITS) - 1;

  logic [CUR_W-1:0] q;

  always_comb begin
    q         = CUR_W'(i_in / CUR_W'(LSB));
    overrange = 32'(q) > FULL;
    code      = overrange ? ADC_BITS'(FULL) : ADC_BITS'(q);
  end

endmodule
