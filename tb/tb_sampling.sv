// tb_sampling -- end-to-end check that the full-size machine samples the
// distribution its update rules define, for each element kind.
//
// Small problems are loaded through the setup port and run for a long time
// at constant beta. The joint state of the elements in use is read from the
// p-element outputs once per iteration (at the selection clock), and the
// histogram is compared with a distribution computed here with real
// arithmetic, independently of the design:
//   * 4 p-bits, random J and h: the Boltzmann distribution
//     exp(-beta E), E = -sum h m - 1/2 sum J_ij m_i m_j;
//   * 3 isotropic p-dits[3], random J and per-label h: the Boltzmann
//     distribution with E = -sum h_i^(m_i) - 1/2 sum J_ij s(m_i, m_j),
//     s = +1 for equal labels, -1 otherwise;
//   * 2 bounded p-ints, the two-variable ILP x1 + 3 x2 = 0 with objective
//     -x1 + x2 (C = 1, O = 1/5, energy scaled by 5 to make h an integer):
//     the stationary distribution of the random-scan chain in which a p-int
//     steps -1/0/+1 by heat-bath weights and, at a bound, chooses between
//     staying and the one open step. That chain is found by power iteration
//     of its transition matrix. (With moves limited to +-1 the stationary
//     distribution differs slightly from the Boltzmann one; both distances
//     are printed.)
// Each comparison passes if the total variation distance is below 0.03,
// which covers the 1/16 argument step of the exponential tables, the 10-bit
// random code and the statistical error of the correlated samples.
module tb_sampling;
  import pim_pkg::*;

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

  // --------------------------------------------------------------- sampling
  bit  sampling = 0;
  int  hist [64];
  int  nsamp;

  always @(negedge clk) begin
    if (sampling && dut.cap) begin
      int code, mul;
      code = 0; mul = 1;
      for (int i = 0; i < n; i++) begin
        int v;
        if (et == EL_PBIT)      v = (int'(dut.pe_q[i].m) + 1) / 2;
        else if (et == EL_PDIT) v = int'(dut.pe_q[i].m);
        else                    v = int'(dut.pe_q[i].m) - lo[i];
        code += v * mul;
        mul  *= (et == EL_PBIT) ? 2 : (et == EL_PDIT ? 3 : hi[i] - lo[i] + 1);
      end
      hist[code]++;
      nsamp++;
    end
  end

  real pw [64];     // expected distribution
  real bz [64];     // Boltzmann distribution (p-ints: for information)

  task automatic sample(input int iters);
    for (int c = 0; c < 64; c++) hist[c] = 0;
    nsamp = 0;
    run(2000);                  // burn-in
    sampling = 1;
    run(iters);
    sampling = 0;
  endtask

  function automatic real tvd(input real p [64], input int ns);
    real d;
    d = 0.0;
    for (int c = 0; c < 64; c++) begin
      real e;
      e = real'(hist[c]) / real'(ns) - p[c];
      d += (e < 0.0) ? -e : e;
    end
    return d / 2.0;
  endfunction

  // decode a state code into states s[]
  function automatic void decode(input int code, output int s [N_ELEM]);
    for (int i = 0; i < N_ELEM; i++) s[i] = 0;
    for (int i = 0; i < n; i++) begin
      int base;
      base = (et == EL_PBIT) ? 2 : (et == EL_PDIT ? 3 : hi[i] - lo[i] + 1);
      if (et == EL_PBIT)      s[i] = 2 * (code % base) - 1;
      else if (et == EL_PDIT) s[i] = code % base;
      else                    s[i] = code % base + lo[i];
      code = code / base;
    end
  endfunction

  // energy of a state, in problem units
  function automatic real energy(input int s [N_ELEM]);
    real e;
    e = 0.0;
    for (int i = 0; i < n; i++) begin
      if (et == EL_PDIT) begin
        e -= real'(hm[i][s[i]]);
        for (int j = 0; j < n; j++)
          if (j != i) e -= 0.5 * real'(Jm[i][j]) * ((s[i] == s[j]) ? 1.0 : -1.0);
      end else begin
        e -= real'(hm[i][0]) * real'(s[i]);
        for (int j = 0; j < n; j++) e -= 0.5 * real'(Jm[i][j]) * real'(s[i]) * real'(s[j]);
      end
    end
    return e;
  endfunction

  function automatic int nstates();
    int c;
    c = 1;
    for (int i = 0; i < n; i++) c *= (et == EL_PBIT) ? 2 : (et == EL_PDIT ? 3 : hi[i] - lo[i] + 1);
    return c;
  endfunction

  task automatic boltzmann(input real b);
    int  s [N_ELEM];
    real z;
    z = 0.0;
    for (int c = 0; c < 64; c++) bz[c] = 0.0;
    for (int c = 0; c < nstates(); c++) begin
      decode(c, s);
      bz[c] = $exp(-b * energy(s));
      z += bz[c];
    end
    for (int c = 0; c < 64; c++) bz[c] = bz[c] / z;
  endtask

  // encode states into a code
  function automatic int encode(input int s [N_ELEM]);
    int code, mul;
    code = 0; mul = 1;
    for (int i = 0; i < n; i++) begin
      code += (s[i] - lo[i]) * mul;
      mul  *= hi[i] - lo[i] + 1;
    end
    return code;
  endfunction

  // stationary distribution of the random-scan bounded p-int chain
  task automatic pint_chain(input real b);
    real T [64][64];
    real p [64], q [64];
    int  s [N_ELEM], t [N_ELEM];
    int  ns;
    ns = nstates();
    for (int a = 0; a < 64; a++) for (int c = 0; c < 64; c++) T[a][c] = 0.0;
    for (int a = 0; a < ns; a++) begin
      real e0;
      decode(a, s);
      e0 = energy(s);
      for (int i = 0; i < n; i++) begin
        real w [3];
        real z;
        for (int d = -1; d <= 1; d++) begin
          t = s;
          t[i] = s[i] + d;
          if (t[i] < lo[i] || t[i] > hi[i]) w[d + 1] = 0.0;
          else w[d + 1] = $exp(-b * (energy(t) - e0));
        end
        z = w[0] + w[1] + w[2];
        for (int d = -1; d <= 1; d++) begin
          if (w[d + 1] > 0.0) begin
            t = s;
            t[i] = s[i] + d;
            T[a][encode(t)] += w[d + 1] / z / real'(n);
          end
        end
      end
    end
    for (int c = 0; c < 64; c++) p[c] = (c < ns) ? 1.0 / real'(ns) : 0.0;
    for (int it = 0; it < 20000; it++) begin
      for (int c = 0; c < 64; c++) q[c] = 0.0;
      for (int a = 0; a < ns; a++)
        for (int c = 0; c < ns; c++) q[c] += p[a] * T[a][c];
      p = q;
    end
    pw = p;
  endtask

  initial begin
    real d, db;
    cfg = '0; rd_idx = '0; rand_bits = 32'h0bad_cafe;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- p-bits
    clear();
    et = EL_PBIT; n = 4;
    for (int i = 0; i < n; i++) begin
      hm[i][0] = $urandom_range(0, 8) - 4;
      m0[i] = 1;
      for (int j = 0; j < i; j++) begin
        Jm[i][j] = $urandom_range(0, 12) - 6;
        Jm[j][i] = Jm[i][j];
      end
    end
    load_problem(512, 0, 4096);          // beta 1/8
    sample(200000);
    readback("p-bit sampling");
    boltzmann(0.125);
    d = tvd(bz, nsamp);
    $display("4 p-bits, beta 1/8, %0d samples: distance to Boltzmann %f", nsamp, d);
    chk(d < 0.03, "p-bit distribution");

    // ---- isotropic p-dits
    clear();
    et = EL_PDIT; n = 3;
    for (int i = 0; i < n; i++) begin
      for (int a = 0; a < N_DIM; a++) hm[i][a] = $urandom_range(0, 6) - 3;
      m0[i] = i;
      for (int j = 0; j < i; j++) begin
        Jm[i][j] = $urandom_range(0, 8) - 4;
        Jm[j][i] = Jm[i][j];
      end
    end
    load_problem(1024, 0, 4096);         // beta 1/4
    sample(200000);
    readback("p-dit sampling");
    boltzmann(0.25);
    d = tvd(bz, nsamp);
    $display("3 p-dits[3], beta 1/4, %0d samples: distance to Boltzmann %f", nsamp, d);
    chk(d < 0.03, "p-dit distribution");

    // ---- bounded p-ints: 5 * (C (x1 + 3 x2)^2 + O (-x1 + x2)), C = 1, O = 1/5
    clear();
    et = EL_PINT; n = 2;
    Jm[0][0] = -10; Jm[0][1] = -30; Jm[1][0] = -30; Jm[1][1] = -90;
    hm[0][0] = 1; hm[1][0] = -1;
    lo[0] = -3; hi[0] = 3; lo[1] = -1; hi[1] = 1;
    m0[0] = 0; m0[1] = 0;
    load_problem(1024, 0, 4096);         // beta 1/4 on the scaled energy
    sample(300000);
    readback("p-int sampling");
    pint_chain(0.25);
    boltzmann(0.25);
    d  = tvd(pw, nsamp);
    db = tvd(bz, nsamp);
    $display("2 p-ints, beta 1/4, %0d samples: distance to the chain's stationary distribution %f, to Boltzmann %f",
             nsamp, d, db);
    chk(d < 0.03, "p-int distribution");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
