// tb_pim_top -- end-to-end test of the whole machine at its default size
// (64 p-elements, no parameter overrides).
//
// Three problems are loaded through the setup port exactly as a driver
// program would: J rows, start totals computed here from h and the initial
// states, states, bounds and global registers. Each is then run with random
// words from the testbench, and afterwards every element in use is read back
// and its totals are recomputed from scratch from J, h and the read states;
// they must match exactly, which checks every broadcast update of the run.
//   1. p-bits: ferromagnetic ring of 16 under an annealing ramp; at the end
//      at least 3/4 of the bonds must be aligned.
//   2. p-ints: the two-variable ILP x1 + 3 x2 = 0 with narrow bounds, so the
//      bound logic is exercised; states must stay within bounds.
//   3. isotropic p-dits: 3-partition of 14 numbers (values 1..6); states
//      must stay in 0..2.
// Every mechanism the design has is counted from the broadcast bus and must
// occur at least once: J and start-value writes, p-bit flips, p-int steps up
// and down, selections at a lower and at an upper bound, p-dit moves,
// rejected moves, annealing steps, the beta ceiling, done pulses. Each run
// must take exactly two clocks per iteration.
module tb_pim_top;
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
    repeat (2000000) @(posedge clk);
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

  // ------------------------------------------------------------- mechanisms
  int c_jw, c_isw, c_flip, c_up, c_down, c_atlo, c_athi, c_pdit, c_stay, c_anneal, c_ceiling, c_done;

  always @(negedge clk) begin
    if (dut.bc.valid && dut.bc.stage == ST_J)  c_jw++;
    if (dut.bc.valid && dut.bc.stage == ST_IS) c_isw++;
    if (dut.bc.valid && dut.bc.stage == ST_RUN) begin
      if (!dut.upd.moved) c_stay++;
      else if (dut.elem == EL_PBIT) c_flip++;
      else if (dut.elem == EL_PINT && dut.upd.k == 3'sd1)  c_up++;
      else if (dut.elem == EL_PINT && dut.upd.k == -3'sd1) c_down++;
      else if (dut.elem == EL_PDIT) c_pdit++;
      if (dut.elem == EL_PINT && dut.dreg.at_lo) c_atlo++;
      if (dut.elem == EL_PINT && dut.dreg.at_hi) c_athi++;
    end
    if (dut.anneal_step && dut.bstep != 0) c_anneal++;
    if (busy && dut.bstep != 0 && beta == dut.bmax) c_ceiling++;
    if (done) c_done++;
  end

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

  int nums [14] = '{3, 1, 6, 2, 5, 4, 4, 6, 1, 3, 2, 5, 6, 2};

  initial begin
    int aligned;
    cfg = '0; rd_idx = '0; rand_bits = 32'hdead_beef;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1: p-bit ferromagnetic ring
    clear();
    et = EL_PBIT; n = 16;
    for (int i = 0; i < n; i++) begin
      Jm[i][(i + 1) % n] = 20;
      Jm[(i + 1) % n][i] = 20;
      m0[i] = ($urandom_range(0, 1) != 0) ? 1 : -1;
    end
    load_problem(128, 2000, 4096);      // beta 1/32 -> 1
    run(3000);
    readback("p-bit ring");
    aligned = 0;
    for (int i = 0; i < n; i++) if (mf[i] == mf[(i + 1) % n]) aligned++;
    chk(aligned >= 12, $sformatf("p-bit ring: %0d of 16 bonds aligned", aligned));

    // ---- 2: p-int ILP x1 + 3 x2 = 0, C = 1, objective -x1 + x2 with O = 1/5 -> J = -2 S S^T
    clear();
    et = EL_PINT; n = 2;
    Jm[0][0] = -2; Jm[0][1] = -6; Jm[1][0] = -6; Jm[1][1] = -18;
    hm[0][0] = 0;  hm[1][0] = 0;
    lo[0] = -3; hi[0] = 3; lo[1] = -1; hi[1] = 1;
    m0[0] = 2; m0[1] = -1;
    load_problem(410, 0, 4096);         // constant beta 0.1
    run(600);
    readback("p-int ILP");

    // ---- 3: isotropic p-dit 3-partition of 14 numbers, J' = -2 n_i n_j
    clear();
    et = EL_PDIT; n = 14;
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < n; j++) Jm[i][j] = (i == j) ? 0 : -2 * nums[i] * nums[j];
      m0[i] = i % 3;
    end
    load_problem(128, 0, 4096);         // constant beta 1/32
    run(1500);
    readback("p-dit partition");

    $display("mechanisms: J writes %0d, start writes %0d, p-bit flips %0d, p-int up %0d down %0d, at lower bound %0d, at upper bound %0d, p-dit moves %0d, no move %0d, anneal steps %0d, at beta ceiling %0d, done %0d",
             c_jw, c_isw, c_flip, c_up, c_down, c_atlo, c_athi, c_pdit, c_stay, c_anneal, c_ceiling, c_done);
    chk(c_jw > 0, "J writes happened");
    chk(c_isw > 0, "start-value writes happened");
    chk(c_flip > 0, "p-bit flips happened");
    chk(c_up > 0, "p-int steps up happened");
    chk(c_down > 0, "p-int steps down happened");
    chk(c_atlo > 0, "selection at a lower bound happened");
    chk(c_athi > 0, "selection at an upper bound happened");
    chk(c_pdit > 0, "p-dit moves happened");
    chk(c_stay > 0, "rejected moves happened");
    chk(c_anneal > 0, "annealing steps happened");
    chk(c_ceiling > 0, "beta ceiling reached");
    chk(c_done == 3, "one done pulse per run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
