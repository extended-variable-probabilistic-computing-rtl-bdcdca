// tb_exp_lut -- checks every entry of the e^-x and e^-2x tables against
// exp() evaluated in the testbench (within one LSB, or saturated where the
// exact value does not fit). Combinational, no clock; a watchdog still ends
// the run if it hangs.
module tb_exp_lut;
  import pim_pkg::*;

  int checks = 0, failures = 0;
  logic signed [LUT_AW-1:0] x;
  logic [EXP_W-1:0] y1, y2;

  exp_lut #(.SCALE(1)) dut1 (.x(x), .y(y1));
  exp_lut #(.SCALE(2)) dut2 (.x(x), .y(y2));

  function automatic void check(input int scale, input int s, input logic [EXP_W-1:0] got);
    real want, g;
    want = $exp(-scale * s / 16.0) * 4096.0;
    g    = real'(got);
    checks++;
    if (want >= 16777215.0) begin
      if (got != '1) begin
        failures++;
        $display("FAIL scale=%0d x=%0d got=%0d want saturated", scale, s, got);
      end
    end else if (g - want > 1.0 || want - g > 1.0) begin
      failures++;
      $display("FAIL scale=%0d x=%0d got=%0d want=%f", scale, s, got, want);
    end
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = -128; s < 128; s++) begin
      x = LUT_AW'(s);
      #1;
      check(1, s, y1);
      check(2, s, y2);
    end
    // spot values independent of the formula above
    x = 0; #1;
    checks++; if (y1 != 24'd4096 || y2 != 24'd4096) begin failures++; $display("FAIL exp(0) != 1"); end
    x = 8'sd16; #1;   // x = 1
    checks++; if (y1 != 24'd1507) begin failures++; $display("FAIL exp(-1) got %0d", y1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
