// tb_payoff_mapper: checks the element-to-cell mapping and the write timing.
// For random elements of a 2 x 3 matrix (I = 4, t = 4) it records every write
// and compares row, column block and unary pattern with values worked out
// here, checks that an element takes exactly I write cycles, that in_ready is
// low meanwhile, and that the worked example value 3 becomes 1110 per group.
module tb_payoff_mapper;
  timeunit 1ns; timeprecision 1ps;
  localparam int I = 4, T = 4, R = 2, C = 3;
  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_ready;
  logic [0:0]  in_row = 0;
  logic [1:0]  in_col = 0;
  logic [2:0]  in_value = 0;
  logic        wr_en;
  logic [2:0]  wr_row;
  logic [1:0]  wr_blk;
  logic [15:0] wr_data;

  payoff_mapper #(.ROW_ACT(R), .COL_ACT(C), .I_INT(I), .T_CELL(T)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] expect_pat(int v);
    logic [15:0] p = '0;
    for (int b = 0; b < 16; b++) p[b] = ((b % T) < v);
    return p;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, c, v, nw;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(in_ready && !wr_en, "idle after reset");
    for (int n = 0; n < 40; n++) begin
      r = $urandom_range(0, R-1); c = $urandom_range(0, C-1);
      v = (n == 0) ? 3 : $urandom_range(0, T);
      in_row = 1'(r); in_col = 2'(c); in_value = 3'(v); in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      nw = 0;
      while (wr_en) begin
        check(!in_ready, "ready low while writing");
        check(wr_row == 3'(r*I + nw), "write row");
        check(wr_blk == 2'(c), "write column block");
        check(wr_data == expect_pat(v), "unary pattern");
        if (n == 0) check(wr_data == 16'h7777, "value 3 stored as 1110 in every group");
        nw++;
        @(negedge clk);
      end
      check(nw == I, $sformatf("element took %0d write cycles, expected %0d", nw, I));
      check(in_ready, "ready again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
