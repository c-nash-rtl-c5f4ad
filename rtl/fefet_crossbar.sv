// fefet_crossbar: behavioural model of a C-Nash 1FeFET1R crossbar (analog
// array; this model is not meant for synthesis into a real array).
//
// The array has ROWS = I_INT*ROW_ACT word lines and COLS = I_INT*T_CELL*COL_ACT
// data lines. Each 1FeFET1R cell stores one bit (low-VTH = 1). With the gate
// (WL) and the drain (DL) both driven, a cell storing 1 conducts one unit of
// ON current, fixed by its series resistor; any other combination conducts
// nothing, so a cell computes i = p * m * q on binary inputs. Currents here are
// integers in units of that ON current, which models the linear current
// versus activated-cell-count behaviour of the array and no device variation.
//
// Output: blk_current[r] is the current collected from row block r (the
// I_INT word lines of action r), summed over all columns. In Phase 1 (all WLs
// on, q on the DLs) this is I^2 * (Mq)_r; summing all row blocks gives
// I^2 * p^T M q in Phase 2. How source lines are grouped into these per-row
// outputs is this model's choice: the text states that an all-ones p makes the
// array output Mq, while the schematic draws the source lines along columns.
//
// Write port: one row segment of I_INT*T_CELL cells (column block wr_blk of
// row wr_row) per clock while wr_en is high, as produced by payoff_mapper.
// The cells are non-volatile and have no reset: they hold what was written
// last. Reads are combinational.
module fefet_crossbar
  import cnash_pkg::*;
#(
  parameter int unsigned ROW_ACT = 8,
  parameter int unsigned COL_ACT = 8,
  parameter int unsigned I_INT   = 4,
  parameter int unsigned T_CELL  = 4,
  parameter int unsigned CUR_W   = 13,
  localparam int unsigned ROWS = I_INT * ROW_ACT,
  localparam int unsigned GW   = I_INT * T_CELL,
  localparam int unsigned COLS = GW * COL_ACT,
  localparam int unsigned WRW  = idx_w(ROWS),
  localparam int unsigned CW   = idx_w(COL_ACT)
) (
  input  logic             clk,
  // write port
  input  logic             wr_en,
  input  logic [WRW-1:0]   wr_row,
  input  logic [CW-1:0]    wr_blk,
  input  logic [GW-1:0]    wr_data,
  // analog read
  input  logic [ROWS-1:0]  wl,
  input  logic [COLS-1:0]  dl,
  output logic [CUR_W-1:0] blk_current [ROW_ACT]
);

  timeunit 1ns;
  timeprecision 1ps;

  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_row][int'(wr_blk)*GW +: GW] <= wr_data;
  end

  always_comb begin
    for (int b = 0; b < ROW_ACT; b++) begin
      blk_current[b] = '0;
      for (int r = b*I_INT; r < (b+1)*I_INT; r++)
        if (wl[r]) blk_current[b] = blk_current[b] + CUR_W'($countones(cells[r] & dl));
    end
  end

endmodule
