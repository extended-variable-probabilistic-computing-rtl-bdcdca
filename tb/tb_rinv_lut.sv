// tb_rinv_lut -- checks the 1/r-1 table: every code against the formula
// u = 1/r - 1 with r = (q+0.5)/1024 (within one LSB), plus the property that
// u falls as r rises, and u = 1 at the middle of the range.
module tb_rinv_lut;
  import pim_pkg::*;

  int checks = 0, failures = 0;
  logic [RNG_W-1:0] r;
  logic [EXP_W-1:0] u, prev;

  rinv_lut dut (.r(r), .u(u));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real want;
    prev = '1;
    for (int q = 0; q < 2**RNG_W; q++) begin
      r = RNG_W'(q);
      #1;
      want = (1024.0 / (q + 0.5) - 1.0) * 4096.0;
      checks++;
      if (real'(u) - want > 1.0 || want - real'(u) > 1.0) begin
        failures++;
        $display("FAIL q=%0d u=%0d want=%f", q, u, want);
      end
      checks++;
      if (q > 0 && u >= prev) begin
        failures++;
        $display("FAIL not decreasing at q=%0d", q);
      end
      prev = u;
    end
    // r just below 1/2 -> u just above 1 ; r just above 1/2 -> u below 1
    r = 10'd511; #1; checks++; if (!(u > 24'd4096)) begin failures++; $display("FAIL q=511 u=%0d", u); end
    r = 10'd512; #1; checks++; if (!(u < 24'd4096)) begin failures++; $display("FAIL q=512 u=%0d", u); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
