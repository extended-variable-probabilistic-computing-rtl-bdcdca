// tb_partition3 -- the 3-partition workload: 14 numbers drawn from 1..6,
// split into three sets of (nearly) equal sum, solved on the full-size
// machine two ways, as in the published comparison:
//   * 14 isotropic p-dits with three dimensions, J'_ij = -2 n_i n_j, h = 0;
//   * 42 p-bits in one-hot groups of three with constraint constant C = 94
//     (the published value) and C = 127 (the largest an 8-bit J holds),
//     objective constant O = 1 (h = -C(|D|-2), J = -C inside a group,
//     +2 O n_i n_j across groups for different sets, -2 O n_i n_j for the same
//     set).
// Both run TRIALS trials of 512 iterations at constant beta = 1/32 from
// random start states. After each trial every total is checked against a
// recomputation from J, h and the final states. The testbench reports, per
// encoding, how many trials ended at a valid assignment and how many at an
// optimum (largest minus smallest set sum equal to the lower bound); it
// requires the p-dit machine to reach the optimum at least once and never to
// produce an invalid assignment. The p-bit result is reported, not checked:
// whether C = 94 is large enough to keep the one-hot groups valid depends on
// the numbers (the sums here are large), and C cannot exceed 127 in an 8-bit
// J entry.
module tb_partition3;
  import pim_pkg::*;

  localparam int TRIALS = 40;
  localparam int ITERS  = 512;

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
    t = 2 * hm[i][a];
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

  int nums [14];

  // largest minus smallest set sum for an assignment (-1 if invalid)
  function automatic int spread(input int set_of [14]);
    int s [3];
    int mx, mn;
    s = '{0, 0, 0};
    for (int i = 0; i < 14; i++) begin
      if (set_of[i] < 0 || set_of[i] > 2) return -1;
      s[set_of[i]] += nums[i];
    end
    mx = s[0]; mn = s[0];
    for (int a = 1; a < 3; a++) begin
      if (s[a] > mx) mx = s[a];
      if (s[a] < mn) mn = s[a];
    end
    return mx - mn;
  endfunction

  initial begin
    int total, best_possible, sp, pdit_opt, pdit_valid, pbit_opt, pbit_valid;
    int set_of [14];
    int pbit_valid_c [2], pbit_opt_c [2];
    cfg = '0; rd_idx = '0; rand_bits = 32'h0bad_cafe;
    total = 0;
    for (int i = 0; i < 14; i++) begin
      nums[i] = $urandom_range(1, 6);
      total += nums[i];
    end
    best_possible = (total % 3 == 0) ? 0 : 1;
    $display("numbers: %p", nums);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- isotropic p-dits
    clear();
    et = EL_PDIT; n = 14;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) Jm[i][j] = (i == j) ? 0 : -2 * nums[i] * nums[j];
    for (int i = 0; i < n; i++) m0[i] = $urandom_range(0, 2);
    load_problem(128, 0, 4096);
    pdit_opt = 0; pdit_valid = 0;
    for (int t = 0; t < TRIALS; t++) begin
      for (int i = 0; i < n; i++) m0[i] = $urandom_range(0, 2);
      reload_state();
      run(ITERS);
      readback("p-dit");
      for (int i = 0; i < 14; i++) set_of[i] = mf[i];
      sp = spread(set_of);
      if (sp >= 0) pdit_valid++;
      if (sp == best_possible) pdit_opt++;
    end

    // ---- one-hot p-bits, element 3*i + d is "number i in set d"
    for (int ci = 0; ci < 2; ci++) begin
      int cc;
      cc = (ci == 0) ? 94 : 127;
      clear();
      et = EL_PBIT; n = 42;
      for (int i = 0; i < 14; i++)
        for (int d = 0; d < 3; d++) begin
          hm[3*i+d][0] = -cc * (3 - 2);
          for (int j = 0; j < 14; j++)
            for (int e = 0; e < 3; e++) begin
              if (i == j && d != e)      Jm[3*i+d][3*j+e] = -cc;
              else if (i != j && d != e) Jm[3*i+d][3*j+e] = 2 * nums[i] * nums[j];
              else if (i != j && d == e) Jm[3*i+d][3*j+e] = -2 * nums[i] * nums[j];
            end
        end
      for (int i = 0; i < n; i++) m0[i] = -1;
      load_problem(128, 0, 4096);
      pbit_opt = 0; pbit_valid = 0;
      for (int t = 0; t < TRIALS; t++) begin
        for (int i = 0; i < n; i++) m0[i] = ($urandom_range(0, 2) == 0) ? 1 : -1;
        reload_state();
        run(ITERS);
        readback("p-bit");
        for (int i = 0; i < 14; i++) begin
          int cnt;
          cnt = 0; set_of[i] = -1;
          for (int d = 0; d < 3; d++) if (mf[3*i+d] == 1) begin cnt++; set_of[i] = d; end
          if (cnt != 1) set_of[i] = -1;
        end
        sp = spread(set_of);
        if (sp >= 0) pbit_valid++;
        if (sp == best_possible) pbit_opt++;
      end
      pbit_valid_c[ci] = pbit_valid;
      pbit_opt_c[ci]   = pbit_opt;
    end

    $display("3-partition of %0d numbers (sum %0d), %0d trials of %0d iterations at beta 1/32:", 14, total, TRIALS, ITERS);
    $display("  isotropic p-dits: %0d valid, %0d optimal", pdit_valid, pdit_opt);
    $display("  one-hot p-bits, C = 94 : %0d valid, %0d optimal", pbit_valid_c[0], pbit_opt_c[0]);
    $display("  one-hot p-bits, C = 127: %0d valid, %0d optimal", pbit_valid_c[1], pbit_opt_c[1]);
    chk(pdit_valid == TRIALS, "p-dit assignments are always valid");
    chk(pdit_opt > 0, "p-dit machine reaches the optimum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
