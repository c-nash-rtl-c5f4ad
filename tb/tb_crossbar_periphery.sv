// tb_crossbar_periphery: checks that the periphery sums the row-block
// currents and digitises the sum, clipping at the ADC's full scale.
module tb_crossbar_periphery;
  timeunit 1ns; timeprecision 1ps;
  int checks = 0, failures = 0;
  logic [9:0] blk_current [4];
  logic [7:0] vmv_code;
  logic       overrange;

  crossbar_periphery #(.ROW_ACT(4), .CUR_W(10), .ADC_BITS(8)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int n = 0; n < 500; n++) begin
      s = 0;
      for (int b = 0; b < 4; b++) begin
        blk_current[b] = 10'($urandom_range(0, (n < 250) ? 63 : 200));
        s += blk_current[b];
      end
      #1;
      check(int'(vmv_code) == ((s > 255) ? 255 : s), $sformatf("sum %0d gave %0d", s, vmv_code));
      check(overrange == (s > 255), "overrange flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
