// tb_p_element -- checks one p-element (ID 5) against a reference model
// kept in the testbench.
//
// For each element type it writes a random J row and start values through
// the ST_J / ST_IS stages (including writes addressed to other elements,
// which must be ignored), then broadcasts a few hundred random run-stage
// updates from random source elements, including the element itself, and
// after every clock compares the outputs i1..i3, state and bound flags with
// the model: p-bit/p-int 2I += 2 J k, p-dit 2I^to += 4J and 2I^from -= 4J.
module tb_p_element;
  import pim_pkg::*;

  localparam idx_t MY_ID = idx_t'(5);

  int checks = 0, failures = 0;
  logic     clk = 0, rst_n = 0;
  elem_e    elem;
  bcast_t   bc;
  pel_out_t q;

  p_element #(.ID(MY_ID)) dut (.*);

  always #5 clk = ~clk;

  // reference model
  int jm [N_ELEM];
  int am [N_DIM];
  int mm, lom, him;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wrap16(input int v);
    return int'(itot_t'(v));
  endfunction

  task automatic compare(input string what);
    int e1, e2, e3;
    bit elo, ehi;
    if (elem == EL_PDIT) begin
      e1 = am[0]; e2 = am[1]; e3 = am[2];
    end else begin
      e1 = wrap16(am[0] + jm[MY_ID]);
      e2 = wrap16(am[0] - jm[MY_ID]);
      e3 = am[0];
    end
    elo = (elem == EL_PINT) && (mm <= lom);
    ehi = (elem == EL_PINT) && (mm >= him);
    checks++;
    if (int'(q.i1) != e1 || int'(q.i2) != e2 || int'(q.i3) != e3 || int'(q.m) != mm ||
        q.at_lo != elo || q.at_hi != ehi) begin
      failures++;
      $display("FAIL %s: got (%0d %0d %0d m=%0d lo=%0d hi=%0d) want (%0d %0d %0d m=%0d lo=%0d hi=%0d)",
               what, q.i1, q.i2, q.i3, q.m, q.at_lo, q.at_hi, e1, e2, e3, mm, elo, ehi);
    end
  endtask

  task automatic drive(input stage_e st, input idx_t idx, input logic [VAL_W-1:0] v);
    @(negedge clk);
    bc.valid = 1'b1;
    bc.stage = st;
    bc.index = idx;
    bc.val   = v;
    @(negedge clk);
    bc = '0;
  endtask

  task automatic write_is(input idx_t idx, input field_e f, input int d);
    drive(ST_IS, idx, pack_is(f, 16'(d)));
    if (idx == MY_ID) begin
      case (f)
        F_I1: am[0] = wrap16(d);
        F_I2: am[1] = wrap16(d);
        F_I3: am[2] = wrap16(d);
        F_M:  mm  = int'(state_t'(d));
        F_LO: lom = int'(state_t'(d));
        F_HI: him = int'(state_t'(d));
        default: ;
      endcase
    end
  endtask

  task automatic setup(input elem_e et);
    int v;
    elem = et;
    for (int j = 0; j < N_ELEM; j++) begin
      v = $urandom_range(0, 255) - 128;
      if (et == EL_PDIT && j == int'(MY_ID)) v = 0;
      drive(ST_J, MY_ID, pack_j(idx_t'(j), j_t'(v)));
      jm[j] = v;
      // a write to another element must not land here
      drive(ST_J, idx_t'((int'(MY_ID) + 1 + (j % (N_ELEM - 2))) % N_ELEM), pack_j(idx_t'(j), j_t'(77)));
    end
    write_is(MY_ID, F_I1, $urandom_range(0, 2000) - 1000);
    write_is(MY_ID, F_I2, $urandom_range(0, 2000) - 1000);
    write_is(MY_ID, F_I3, $urandom_range(0, 2000) - 1000);
    write_is(idx_t'(9), F_I1, 12345);
    if (et == EL_PDIT) write_is(MY_ID, F_M, 1);
    else if (et == EL_PBIT) write_is(MY_ID, F_M, -1);
    else write_is(MY_ID, F_M, 0);
    write_is(MY_ID, F_LO, -3);
    write_is(MY_ID, F_HI, 4);
    compare("after setup");
  endtask

  task automatic run_updates(input int n);
    upd_t u;
    idx_t src;
    int   k, fr, to;
    for (int t = 0; t < n; t++) begin
      src = (t % 5 == 0) ? MY_ID : idx_t'($urandom_range(0, N_ELEM - 1));
      u = '0;
      if (elem == EL_PDIT) begin
        fr = (src == MY_ID) ? mm : $urandom_range(0, 2);
        to = $urandom_range(0, 2);
        u.from_dim = 2'(fr);
        u.to_dim   = 2'(to);
        u.moved    = (fr != to);
        if (t % 7 == 3) u.moved = 1'b0;   // not moved: no effect
      end else if (elem == EL_PBIT) begin
        k = (src == MY_ID) ? -2 * mm : ($urandom_range(0, 1) ? 2 : -2);
        if (t % 7 == 3) k = 0;
        u.k = 3'(k);
        u.moved = (k != 0);
      end else begin
        k = $urandom_range(0, 2) - 1;
        if (src == MY_ID && mm + k > him) k = -1;
        if (src == MY_ID && mm + k < lom) k = 1;
        u.k = 3'(k);
        u.moved = (k != 0);
      end
      drive(ST_RUN, src, pack_upd(u));
      if (u.moved) begin
        if (elem == EL_PDIT) begin
          am[u.to_dim]   = wrap16(am[u.to_dim] + 4 * jm[src]);
          am[u.from_dim] = wrap16(am[u.from_dim] - 4 * jm[src]);
          if (src == MY_ID) mm = int'(u.to_dim);
        end else begin
          am[0] = wrap16(am[0] + 2 * jm[src] * int'(u.k));
          if (src == MY_ID) mm = mm + int'(u.k);
        end
      end
      compare($sformatf("update %0d from %0d", t, src));
    end
  endtask

  initial begin
    bc = '0;
    elem = EL_PBIT;
    repeat (2) @(negedge clk);
    rst_n = 1;
    setup(EL_PBIT); run_updates(300);
    setup(EL_PINT); run_updates(300);
    setup(EL_PDIT); run_updates(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
