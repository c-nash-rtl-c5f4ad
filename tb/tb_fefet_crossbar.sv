// tb_fefet_crossbar: checks the crossbar model's write port and its current
// sums. A 2 x 2-element array (I = 4, t = 4: 8 rows, 32 columns) is filled
// with random bits through the write port while a mirror is kept here; for
// random WL/DL patterns each row block's current must equal the number of
// stored ones whose WL and DL are both on. Also checks the worked example
// 0.25 x 3 x 0.75 with I = t = 4, which must give 9 unit currents
// (= 0.25 * 3 * 0.75 * I^2).
module tb_fefet_crossbar;
  timeunit 1ns; timeprecision 1ps;
  localparam int I = 4, T = 4, RA = 2, CA = 2, ROWS = 8, COLS = 32, GW = 16;
  int checks = 0, failures = 0;

  logic            clk = 0;
  logic            wr_en = 0;
  logic [2:0]      wr_row = 0;
  logic [0:0]      wr_blk = 0;
  logic [GW-1:0]   wr_data = 0;
  logic [ROWS-1:0] wl = 0;
  logic [COLS-1:0] dl = 0;
  logic [12:0]     blk_current [RA];
  logic [COLS-1:0] mirror [ROWS];

  fefet_crossbar #(.ROW_ACT(RA), .COL_ACT(CA), .I_INT(I), .T_CELL(T), .CUR_W(13)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_seg(int r, int b, logic [GW-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_row = 3'(r); wr_blk = 1'(b); wr_data = d;
    @(negedge clk);
    wr_en = 0;
    mirror[r][b*GW +: GW] = d;
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int r = 0; r < ROWS; r++)
      for (int b = 0; b < CA; b++) write_seg(r, b, 16'($urandom));
    for (int n = 0; n < 200; n++) begin
      if (n % 20 == 10) write_seg($urandom_range(0, ROWS-1), $urandom_range(0, CA-1), 16'($urandom));
      wl = 8'($urandom); dl = $urandom;
      #1;
      for (int b = 0; b < RA; b++) begin
        e = 0;
        for (int r = b*I; r < (b+1)*I; r++)
          for (int c = 0; c < COLS; c++) e += int'(wl[r] && dl[c] && mirror[r][c]);
        check(int'(blk_current[b]) == e, $sformatf("block %0d current %0d, expected %0d", b, blk_current[b], e));
      end
    end
    // worked example: element 3 in subarray (0,0), p1 = 1/4, q1 = 3/4
    for (int r = 0; r < I; r++) write_seg(r, 0, 16'h7777);
    wl = 8'b0000_0001; dl = 32'h0000_0fff;
    #1;
    check(blk_current[0] == 13'd9, "0.25 x 3 x 0.75 gives 9 cell currents");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
