// tb_plu -- statistical check of the probabilistic logic unit.
//
// For each scenario (element type, beta, totals, state, bound flags) the
// testbench sweeps all 1024 random codes, so the counts of each outcome are
// exact fractions of the PLU's sampling distribution. They are compared with
// the exact (unquantised) probabilities computed here from the model
// equations: the p-bit sigmoid, the three-state p-int update with
// self-coupling and its two-state form at a bound, and the three-way
// isotropic p-dit softmax. The tolerance of 0.03 covers the 1/16 argument
// step and the 1/1024 random step. It also checks the encoding of the result
// (k = new - old for p-bits, moved flags, from/to dimensions). Strongly
// biased cases, where two outcomes are far more likely than the third,
// check that the weights are taken relative to the most likely outcome and
// so do not saturate.
module tb_plu;
  import pim_pkg::*;

  int checks = 0, failures = 0;

  elem_e            elem;
  beta_t            beta;
  logic [RNG_W-1:0] r;
  pel_out_t         sel;
  upd_t             upd;

  plu dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real a);
    return a < 0.0 ? -a : a;
  endfunction

  task automatic check_p(input string what, input real got, input real want);
    checks++;
    if (absr(got - want) > 0.03) begin
      failures++;
      $display("FAIL %s: got %f want %f", what, got, want);
    end
  endtask

  // sweep r; count outcomes 0 (up / +1 / dim0), 1 (stay / dim1), 2 (down / -1 / dim2)
  task automatic sweep(output real p0, output real p1, output real p2);
    int c0, c1, c2;
    c0 = 0; c1 = 0; c2 = 0;
    for (int q = 0; q < 2**RNG_W; q++) begin
      r = RNG_W'(q);
      #1;
      if (elem == EL_PDIT) begin
        if (upd.from_dim != sel.m[1:0] || upd.moved != (upd.to_dim != sel.m[1:0])) begin
          checks++; failures++;
          $display("FAIL p-dit encoding from=%0d to=%0d moved=%0d", upd.from_dim, upd.to_dim, upd.moved);
        end
        case (upd.to_dim)
          2'd0: c0++;
          2'd1: c1++;
          default: c2++;
        endcase
      end else if (elem == EL_PBIT) begin
        // new state = old + k must be +-1
        if (int'(sel.m) + int'(upd.k) == 1) c0++;
        else if (int'(sel.m) + int'(upd.k) == -1) c2++;
        else begin checks++; failures++; $display("FAIL p-bit k=%0d m=%0d", upd.k, sel.m); end
        if (upd.moved != (upd.k != 0)) begin checks++; failures++; $display("FAIL p-bit moved flag"); end
      end else begin
        if (upd.k == 3'sd1) c0++;
        else if (upd.k == 3'sd0) c1++;
        else if (upd.k == -3'sd1) c2++;
        else begin checks++; failures++; $display("FAIL p-int k=%0d", upd.k); end
        if (upd.moved != (upd.k != 0)) begin checks++; failures++; $display("FAIL p-int moved flag"); end
      end
    end
    p0 = real'(c0) / 1024.0;
    p1 = real'(c1) / 1024.0;
    p2 = real'(c2) / 1024.0;
  endtask

  // p-bit: I given as a real, total carried as 2I
  task automatic pbit_case(input real b, input int i, input int m);
    real p0, p1, p2, want, bb;
    elem = EL_PBIT;
    bb = b;
    beta = beta_t'(longint'(b * 4096.0));
    bb = real'(beta) / 4096.0;
    sel = '0;
    sel.i3 = itot_t'(2 * i);
    sel.i1 = sel.i3; sel.i2 = sel.i3;
    sel.m = state_t'(m);
    sweep(p0, p1, p2);
    want = 1.0 / (1.0 + $exp(-2.0 * bb * i));
    check_p($sformatf("p-bit I=%0d beta=%f P(+1)", i, bb), p0, want);
  endtask

  // p-int: I and J_ii; lo/hi flags
  task automatic pint_case(input real b, input int i, input int jii, input bit lo, input bit hi);
    real p0, p1, p2, bb, wu, ws, wd, z;
    elem = EL_PINT;
    beta = beta_t'(longint'(b * 4096.0));
    bb = real'(beta) / 4096.0;
    sel = '0;
    sel.i1 = itot_t'(2 * i + jii);
    sel.i2 = itot_t'(2 * i - jii);
    sel.i3 = itot_t'(2 * i);
    sel.m  = 8'sd3;
    sel.at_lo = lo;
    sel.at_hi = hi;
    sweep(p0, p1, p2);
    // weights relative to 'up': E_stay - E_up = I + J/2, E_down - E_up = 2I
    wu = lo && hi ? 0.0 : (hi ? 0.0 : 1.0);
    ws = $exp(-bb * (i + jii / 2.0));
    wd = lo ? 0.0 : $exp(-bb * 2.0 * i);
    z  = wu + ws + wd;
    check_p($sformatf("p-int I=%0d J=%0d lo=%0d hi=%0d up", i, jii, lo, hi), p0, wu / z);
    check_p($sformatf("p-int I=%0d J=%0d lo=%0d hi=%0d stay", i, jii, lo, hi), p1, ws / z);
    check_p($sformatf("p-int I=%0d J=%0d lo=%0d hi=%0d down", i, jii, lo, hi), p2, wd / z);
  endtask

  // p-dit: three totals I^a
  task automatic pdit_case(input real b, input int ia, input int ib, input int ic, input int m);
    real p0, p1, p2, bb, wa, wb, wc, z;
    elem = EL_PDIT;
    beta = beta_t'(longint'(b * 4096.0));
    bb = real'(beta) / 4096.0;
    sel = '0;
    sel.i1 = itot_t'(2 * ia);
    sel.i2 = itot_t'(2 * ib);
    sel.i3 = itot_t'(2 * ic);
    sel.m  = state_t'(m);
    sweep(p0, p1, p2);
    wa = $exp(bb * ia); wb = $exp(bb * ib); wc = $exp(bb * ic);
    z = wa + wb + wc;
    check_p($sformatf("p-dit (%0d,%0d,%0d) P(a)", ia, ib, ic), p0, wa / z);
    check_p($sformatf("p-dit (%0d,%0d,%0d) P(b)", ia, ib, ic), p1, wb / z);
    check_p($sformatf("p-dit (%0d,%0d,%0d) P(c)", ia, ib, ic), p2, wc / z);
  endtask

  initial begin
    // p-bits
    pbit_case(1.0/32, 0, 1);
    pbit_case(1.0/32, 20, -1);
    pbit_case(1.0/32, -25, 1);
    pbit_case(0.25, 3, 1);
    pbit_case(0.25, -2, -1);
    pbit_case(1.0, 40, -1);      // saturated: always +1
    // p-ints, no self-coupling: equal thirds at I = 0
    pint_case(1.0/16, 0, 0, 0, 0);
    pint_case(1.0/16, 10, 0, 0, 0);
    pint_case(1.0/16, -12, 0, 0, 0);
    pint_case(1.0/8, 3, -10, 0, 0);
    pint_case(1.0/8, -4, 6, 0, 0);
    pint_case(0.25, 2, 0, 1, 0);
    pint_case(0.25, -3, -4, 1, 0);
    pint_case(0.25, -2, 0, 0, 1);
    pint_case(0.25, 3, -6, 0, 1);
    pint_case(0.25, 3, 0, 1, 1);
    // strongly biased: the likely outcomes have weights far above e^8
    // relative to the unlikely one, so they must not both saturate
    pint_case(0.25, -40, 0, 0, 0);
    pint_case(0.25, 40, -20, 0, 0);
    pint_case(0.5, -30, 6, 0, 1);
    pbit_case(0.5, -60, 1);
    // isotropic p-dits
    pdit_case(1.0/32, 0, 0, 0, 0);
    pdit_case(1.0/32, 30, 0, -30, 1);
    pdit_case(0.25, -4, 5, 1, 2);
    pdit_case(0.125, 10, 12, -20, 0);
    pdit_case(0.5, -3, -6, 2, 1);
    pdit_case(0.5, -40, 10, 11, 0);
    pdit_case(0.25, 50, -60, 52, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
