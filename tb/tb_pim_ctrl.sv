// tb_pim_ctrl -- checks the sequencer on its own.
//
// Setup: global register writes appear on their outputs; J and start-value
// writes appear on the broadcast bus for exactly one clock with the right
// stage, index and val format. Run: after 'start' the controller must
// alternate capture (cycle 1) and run-stage broadcast (cycle 2) for exactly
// N iterations, 2N clocks, pick each element as (rand[15:0] * n_elem) >> 16
// from the random word it acknowledged, pass rand[31:22] to the PLU, forward
// the PLU result unchanged, strobe the annealer once per iteration and pulse
// 'done' once. While idle the multiplexer select follows the read-out index.
module tb_pim_ctrl;
  import pim_pkg::*;

  int checks = 0, failures = 0;

  logic              clk = 0, rst_n = 0;
  logic              cfg_valid = 0;
  cfg_req_t          cfg;
  logic              start = 0;
  logic [RAND_W-1:0] rand_bits;
  logic              rand_ack;
  upd_t              upd;
  idx_t              rd_idx;
  bcast_t            bc;
  idx_t              sel_idx;
  logic              cap;
  logic [RNG_W-1:0]  r;
  elem_e             elem;
  logic              anneal_load, anneal_step;
  beta_t             beta0, bmax;
  logic [15:0]       bstep;
  logic              busy, done;
  logic [ITER_W-1:0] iter;

  pim_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random source: a new word after every acknowledged one
  always @(posedge clk) if (rand_ack) rand_bits <= $urandom;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic glb(input logic [5:0] f, input logic [15:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg = '{op: OP_GLB, index: '0, field: f, data: d};
    #1 chk(!bc.valid, "global write must not broadcast");
    @(negedge clk);
    cfg_valid = 0;
  endtask

  int n_run;

  task automatic run(input int n, input int ne);
    int          cycles, ack_seen, steps, loads, dones;
    logic [31:0] word;
    idx_t        exp_idx;
    glb(G_NELEM, 16'(ne));
    glb(G_NITER_LO, 16'(n));
    glb(G_NITER_HI, 16'(n >> 16));
    @(negedge clk);
    word = rand_bits;
    start = 1;
    #1;
    chk(rand_ack && anneal_load, "start acknowledges a word and loads beta");
    exp_idx = idx_t'((longint'(word[15:0]) * ne) >> 16);
    @(negedge clk);
    start = 0;
    cycles = 0; steps = 0; dones = 0;
    while (busy) begin
      // cycle 1
      chk(cap && !bc.valid && sel_idx == exp_idx, $sformatf("cycle 1 of iteration %0d", steps));
      @(negedge clk);
      cycles++;
      // cycle 2: PLU result broadcast
      upd = upd_t'($urandom);
      word = rand_bits;
      #1;
      chk(!cap && bc.valid && bc.stage == ST_RUN && bc.index == exp_idx &&
          bc.val == pack_upd(upd) && rand_ack && anneal_step &&
          r == word[31:22], $sformatf("cycle 2 of iteration %0d", steps));
      chk(int'(exp_idx) < ne, "index inside the elements in use");
      exp_idx = idx_t'((longint'(word[15:0]) * ne) >> 16);
      steps++;
      @(negedge clk);
      cycles++;
      if (done) dones++;
    end
    chk(steps == n && cycles == 2 * n, $sformatf("run of %0d iterations took %0d clocks", n, cycles));
    chk(dones == 1 && iter == ITER_W'(n), "done pulse and iteration count");
    @(negedge clk);
    chk(!done, "done is a single pulse");
    n_run++;
  endtask

  initial begin
    cfg = '0; upd = '0; rd_idx = '0; rand_bits = 32'h1234_5678;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && elem == EL_PBIT, "reset state");
    // global registers
    glb(G_ELEM, 16'd2);   chk(elem == EL_PDIT, "element type");
    glb(G_BETA0, 16'd77); chk(beta0 == 16'd77, "beta0");
    glb(G_BSTEP, 16'd99); chk(bstep == 16'd99, "beta step");
    glb(G_BMAX, 16'd555); chk(bmax == 16'd555, "beta max");
    // J write broadcast
    @(negedge clk);
    cfg_valid = 1; cfg = '{op: OP_J, index: 6'd17, field: 6'd40, data: 16'h00c3};
    #1;
    chk(bc.valid && bc.stage == ST_J && bc.index == 6'd17 && bc.val == pack_j(6'd40, 8'shc3), "J write broadcast");
    @(negedge clk);
    cfg_valid = 0;
    #1 chk(!bc.valid, "J write lasts one clock");
    // start value write
    cfg_valid = 1; cfg = '{op: OP_IS, index: 6'd63, field: 6'(F_HI), data: 16'hfff9};
    #1;
    chk(bc.valid && bc.stage == ST_IS && bc.index == 6'd63 && bc.val == pack_is(F_HI, 16'hfff9), "start-value broadcast");
    @(negedge clk);
    cfg_valid = 0;
    // read-out select while idle
    rd_idx = 6'd42; #1 chk(sel_idx == 6'd42, "read-out select while idle");
    run(1, 64);
    run(7, 10);
    run(40, 3);
    run(25, 64);
    rd_idx = 6'd9; #1 chk(sel_idx == 6'd9, "read-out select after runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
