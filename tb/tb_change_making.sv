// tb_change_making -- the change-making integer program on the full-size
// machine with four p-ints: pay 134 cents with the fewest coins of 3, 4, 7
// and 11 cents (optimum: 14 coins).
//
// Energy E = C (134 - sum s_i x_i)^2 + O sum x_i with x_i in 0..44. The
// couplings J = -2 C s s^T reach 2*11*11 = 242 at C = 1, beyond the signed
// 8-bit J entries, so the problem is scaled by 1/2: J_ij = -s_i s_j
// (self-couplings included), doubled bias 2h_i = 268 s_i - 2O', with
// O' = 1/2. (At this weight a 13-coin state that misses by one cent has the
// same energy as the 14-coin optimum, which 8-bit couplings cannot avoid.)
// Trials start from random states. Short trials run at constant beta; long
// trials use a linear annealing ramp. After each trial all totals are
// checked against a recomputation. The testbench reports how many trials ended with exact
// change, how many of those used the optimal 14 coins and the fewest coins
// seen; it requires exact change in at least one trial. Solution quality is
// reported, not checked: the coin-count weight is small next to the
// constraint weight, and single-step moves must cross constraint violations
// to trade coins, so trials mostly end in exact-change states with extra
// coins.
module tb_change_making;
  import pim_pkg::*;

  localparam int TRIALS = 60;

  int checks = 0, failures = 0;

  logic              clk = 0, rst_n = 0;
  logic              cfg_valid = 0;
  cfg_req_t          cfg;
  logic              start = 0;
  logic [RAND_W-1:0] rand_bits;
  logic              rand_ack;
  idx_t              rd_idx;
  pel_out_t          rd_q;
  logic              busy, done;
  logic [ITER_W-1:0] iter;
  beta_t             beta;

  pim_top dut (.*);

  always #50 clk = ~clk;   // 10 MHz

  always @(posedge clk) if (rand_ack) rand_bits <= $urandom;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- problem
  int    n;
  elem_e et;
  int    Jm [N_ELEM][N_ELEM];
  int    hm [N_ELEM][N_DIM];
  int    m0 [N_ELEM];
  int    lo [N_ELEM];
  int    hi [N_ELEM];
  int    mf [N_ELEM];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic wr(input cfg_op_e op, input int idx, input int f, input int d);
    @(negedge clk);
    cfg_valid = 1;
    cfg = '{op: op, index: idx_t'(idx), field: 6'(f), data: 16'(d)};
    @(negedge clk);
    cfg_valid = 0;
  endtask

  // doubled total of element i, dimension a, for states s
  function automatic int total2(input int i, input int a, input int s[N_ELEM]);
    int t;
    t = h2[i];
    for (int j = 0; j < n; j++) begin
      if (et == EL_PDIT) t += 2 * Jm[i][j] * ((s[j] == a) ? 1 : -1);
      else               t += 2 * Jm[i][j] * s[j];
    end
    return t;
  endfunction

  task automatic load_problem(input int beta0, input int bstep, input int bmax);
    wr(OP_GLB, 0, G_ELEM, int'(et));
    wr(OP_GLB, 0, G_NELEM, n);
    wr(OP_GLB, 0, G_BETA0, beta0);
    wr(OP_GLB, 0, G_BSTEP, bstep);
    wr(OP_GLB, 0, G_BMAX, bmax);
    for (int i = 0; i < N_ELEM; i++)
      for (int j = 0; j < N_ELEM; j++)
        wr(OP_J, i, j, (i < n && j < n) ? Jm[i][j] : 0);
    for (int i = 0; i < n; i++) begin
      wr(OP_IS, i, F_M, m0[i]);
      wr(OP_IS, i, F_LO, lo[i]);
      wr(OP_IS, i, F_HI, hi[i]);
      if (et == EL_PDIT) begin
        wr(OP_IS, i, F_I1, total2(i, 0, m0));
        wr(OP_IS, i, F_I2, total2(i, 1, m0));
        wr(OP_IS, i, F_I3, total2(i, 2, m0));
      end else begin
        wr(OP_IS, i, F_I1, total2(i, 0, m0));
      end
    end
  endtask

  task automatic reload_state();
    for (int i = 0; i < n; i++) begin
      wr(OP_IS, i, F_M, m0[i]);
      if (et == EL_PDIT) begin
        wr(OP_IS, i, F_I1, total2(i, 0, m0));
        wr(OP_IS, i, F_I2, total2(i, 1, m0));
        wr(OP_IS, i, F_I3, total2(i, 2, m0));
      end else begin
        wr(OP_IS, i, F_I1, total2(i, 0, m0));
      end
    end
  endtask

  task automatic run(input int iters);
    int cycles;
    wr(OP_GLB, 0, G_NITER_LO, iters & 16'hffff);
    wr(OP_GLB, 0, G_NITER_HI, iters >> 16);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    chk(cycles == 2 * iters, $sformatf("%0d iterations took %0d clocks", iters, cycles));
    chk(iter == ITER_W'(iters), "iteration counter");
  endtask

  // read back all elements in use and check totals against a recomputation
  task automatic readback(input string name);
    int e1, e2, e3;
    for (int i = 0; i < n; i++) begin
      rd_idx = idx_t'(i);
      #1;
      mf[i] = int'(rd_q.m);
    end
    for (int i = 0; i < n; i++) begin
      rd_idx = idx_t'(i);
      #1;
      if (et == EL_PDIT) begin
        e1 = total2(i, 0, mf); e2 = total2(i, 1, mf); e3 = total2(i, 2, mf);
        chk(mf[i] >= 0 && mf[i] <= 2, $sformatf("%s: p-dit %0d state %0d", name, i, mf[i]));
      end else begin
        e3 = total2(i, 0, mf);
        e1 = e3 + Jm[i][i];
        e2 = e3 - Jm[i][i];
        if (et == EL_PBIT)
          chk(mf[i] == 1 || mf[i] == -1, $sformatf("%s: p-bit %0d state %0d", name, i, mf[i]));
        else
          chk(mf[i] >= lo[i] && mf[i] <= hi[i], $sformatf("%s: p-int %0d state %0d out of [%0d,%0d]",
                                                          name, i, mf[i], lo[i], hi[i]));
      end
      chk(int'(rd_q.i1) == e1 && int'(rd_q.i2) == e2 && int'(rd_q.i3) == e3,
          $sformatf("%s: element %0d totals (%0d %0d %0d) want (%0d %0d %0d)",
                    name, i, rd_q.i1, rd_q.i2, rd_q.i3, e1, e2, e3));
    end
  endtask

  task automatic clear();
    for (int i = 0; i < N_ELEM; i++) begin
      for (int j = 0; j < N_ELEM; j++) Jm[i][j] = 0;
      for (int a = 0; a < N_DIM; a++) hm[i][a] = 0;
      m0[i] = 0; lo[i] = 0; hi[i] = 0;
    end
  endtask

  int coins [4] = '{3, 4, 7, 11};
  int h2 [N_ELEM];

  initial begin
    int exact [2];
    int best [2];
    int lens [2] = '{300, 20000};
    int paid, count;
    int fewest [2];
    cfg = '0; rd_idx = '0; rand_bits = 32'h1357_9bdf;
    repeat (3) @(negedge clk);
    rst_n = 1;
    clear();
    et = EL_PINT; n = 4;
    for (int i = 0; i < N_ELEM; i++) h2[i] = 0;
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) Jm[i][j] = -coins[i] * coins[j];
      h2[i] = 268 * coins[i] - 1;
      lo[i] = 0;
      hi[i] = 44;
      m0[i] = 0;
    end
    for (int L = 0; L < 2; L++) begin
      // short trials: constant beta 1/32 on the halved energy (1/64 on E);
      // long trials: ramp from 1/256 to 1/4
      if (L == 0) load_problem(128, 0, 4096);
      else        load_problem(16, 13, 1024);
      exact[L] = 0; best[L] = 0; fewest[L] = 999;
      for (int t = 0; t < TRIALS; t++) begin
        for (int i = 0; i < 4; i++) m0[i] = $urandom_range(0, 12);
        reload_state();
        run(lens[L]);
        readback("change-making");
        paid = 0; count = 0;
        for (int i = 0; i < 4; i++) begin
          paid  += coins[i] * mf[i];
          count += mf[i];
        end
        if (paid == 134) exact[L]++;
        if (paid == 134 && count < fewest[L]) fewest[L] = count;
        if (paid == 134 && count == 14) best[L]++;
      end
      $display("change-making, %0d trials of %0d iterations: exact change %0d, exact change with 14 coins %0d, fewest coins %0d",
               TRIALS, lens[L], exact[L], best[L], fewest[L]);
    end
    chk(exact[0] + exact[1] > 0, "exact change reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
