// payoff_mapper: write path that programs one payoff element into a crossbar.
//
// In the C-Nash mapping, element (r, c) of the stored matrix occupies an
// I_INT x (I_INT*T_CELL) subarray: rows r*I_INT .. r*I_INT+I_INT-1 and column
// block c. Each row of the subarray holds the element I_INT times (one copy per
// probability step of the column player), and each copy is T_CELL one-bit
// cells holding the value in unary: value v sets the first v cells (the worked
// example stores 3 as 1,1,1,0 with t = 4). Values above T_CELL are clipped.
//
// Interface: valid/ready. An element is taken when in_valid && in_ready; the
// mapper then issues I_INT row writes on consecutive cycles (wr_en high,
// wr_row = r*I_INT + s for s = 0..I_INT-1, wr_blk = c, wr_data = the row
// pattern) and holds in_ready low until the last one. One element therefore
// takes I_INT cycles. Writing one subarray row per cycle is this design's
// choice; the FeFET program pulses themselves are not modelled.
module payoff_mapper
  import cnash_pkg::*;
#(
  parameter int unsigned ROW_ACT = 8,   // row blocks (actions indexing matrix rows)
  parameter int unsigned COL_ACT = 8,   // column blocks
  parameter int unsigned I_INT   = 4,
  parameter int unsigned T_CELL  = 4,
  localparam int unsigned RW  = idx_w(ROW_ACT),
  localparam int unsigned CW  = idx_w(COL_ACT),
  localparam int unsigned VW  = $clog2(T_CELL + 1),
  localparam int unsigned WRW = idx_w(ROW_ACT * I_INT),
  localparam int unsigned SW  = idx_w(I_INT),
  localparam int unsigned GW  = I_INT * T_CELL
) (
  input  logic           clk,
  input  logic           rst_n,
  // element input
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [RW-1:0]  in_row,
  input  logic [CW-1:0]  in_col,
  input  logic [VW-1:0]  in_value,
  // crossbar write port
  output logic           wr_en,
  output logic [WRW-1:0] wr_row,
  output logic [CW-1:0]  wr_blk,
  output logic [GW-1:0]  wr_data
);

  timeunit 1ns;
  timeprecision 1ps;

  logic          busy;
  logic [SW-1:0] step;
  logic [RW-1:0] row_q;
  logic [CW-1:0] col_q;
  logic [GW-1:0] pattern_q;

  // Unary pattern of one element, repeated over the I_INT column groups.
  function automatic logic [GW-1:0] row_pattern(logic [VW-1:0] v);
    logic [GW-1:0] pat;
    pat = '0;
    for (int g = 0; g < I_INT; g++)
      for (int c = 0; c < T_CELL; c++)
        pat[g*T_CELL + c] = (c < int'(v));
    return pat;
  endfunction

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      step      <= '0;
      row_q     <= '0;
      col_q     <= '0;
      pattern_q <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy      <= 1'b1;
        step      <= '0;
        row_q     <= in_row;
        col_q     <= in_col;
        pattern_q <= row_pattern(in_value);
      end
    end else begin
      if (int'(step) == I_INT - 1) busy <= 1'b0;
      step <= step + 1'b1;
    end
  end

  assign wr_en   = busy;
  assign wr_row  = WRW'(int'(row_q) * I_INT + int'(step));
  assign wr_blk  = col_q;
  assign wr_data = pattern_q;

endmodule
