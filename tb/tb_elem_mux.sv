// tb_elem_mux -- drives 64 distinct random element records into the
// multiplexer and checks that every select value returns its own record,
// over several rounds of fresh data.
module tb_elem_mux;
  import pim_pkg::*;

  int checks = 0, failures = 0;
  pel_out_t in [N_ELEM];
  pel_out_t out;
  idx_t     sel;

  elem_mux dut (.in(in), .sel(sel), .out(out));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 4; round++) begin
      for (int k = 0; k < N_ELEM; k++) begin
        in[k].i1 = itot_t'($urandom);
        in[k].i2 = itot_t'($urandom);
        in[k].i3 = itot_t'(k * 7 + round);
        in[k].m  = state_t'($urandom);
        in[k].at_lo = 1'($urandom);
        in[k].at_hi = 1'($urandom);
      end
      for (int k = 0; k < N_ELEM; k++) begin
        sel = idx_t'((k * 37 + round) % N_ELEM);
        #1;
        checks++;
        if (out !== in[sel] || out.i3 != itot_t'(int'(sel) * 7 + round)) begin
          failures++;
          $display("FAIL sel=%0d", sel);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
