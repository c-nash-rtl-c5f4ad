// crossbar_periphery: behavioural model of the read-out periphery under a
// C-Nash crossbar (the SUM and ADC blocks).
//
// The row-block currents of the array are summed on one node (SUM) and
// digitised (ADC). In Phase 2 this is the vector-matrix-vector product
// I^2 * p^T M q of the array. The shift-and-add stage drawn next to the ADC
// has no role here: every cell stores one bit of a unary code, so no bit
// weights need combining. Summation width and ADC resolution are this
// design's choices. Combinational.
module crossbar_periphery #(
  parameter int unsigned ROW_ACT  = 8,
  parameter int unsigned CUR_W    = 13,
  parameter int unsigned ADC_BITS = 13
) (
  input  logic [CUR_W-1:0]    blk_current [ROW_ACT],
  output logic [ADC_BITS-1:0] vmv_code,
  output logic                overrange
);

  timeunit 1ns;
  timeprecision 1ps;

  logic [CUR_W-1:0] total;

  always_comb begin
    total = '0;
    for (int b = 0; b < ROW_ACT; b++) total = total + blk_current[b];
  end

  current_adc #(.CUR_W(CUR_W), .ADC_BITS(ADC_BITS), .LSB(1)) u_adc (
    .i_in(total), .code(vmv_code), .overrange(overrange)
  );

endmodule
