// tb_current_adc: checks the ADC model: code = floor(i / LSB) clipped at full
// scale, with the over-range flag, for every input of an 8-bit current into
// a 4-bit converter with LSB = 3.
module tb_current_adc;
  timeunit 1ns; timeprecision 1ps;
  int checks = 0, failures = 0;
  logic [7:0] i_in;
  logic [3:0] code;
  logic       overrange;

  current_adc #(.CUR_W(8), .ADC_BITS(4), .LSB(3)) dut (.*);

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
    int e;
    for (int i = 0; i < 256; i++) begin
      i_in = 8'(i);
      #1;
      e = i / 3;
      check(overrange == (e > 15), $sformatf("overrange at %0d", i));
      check(int'(code) == ((e > 15) ? 15 : e), $sformatf("code at %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
