// plu -- probabilistic logic unit.
//
// Decides the update of the one p-element selected this iteration from its
// running input totals (carried doubled, see pim_pkg), the inverse
// temperature beta and one random code r. Following the published block
// diagram it scales the totals by beta, looks up exponential weights in two
// e^-x tables and one e^-2x table, maps r through a 1/r-1 table and compares.
// How the lookups are combined is this design's own derivation.
//
// Every outcome o gets a score s_o, with weight exp(beta * s_o / 2):
//   p-bit : +1: 2I          -1: -2I
//   p-int : up: 2I + J_ii   stay: 0     down: -(2I - J_ii)   (Eq. 30)
//   p-dit : dimension a: 2I^a                                (Eq. 22)
// Outcomes blocked by a p-int bound are excluded, and for a p-bit there are
// only two. The reference outcome A is the most likely allowed one, so the
// other two, B and C, have weights X = exp(-beta (s_A - s_B) / 2) <= 1 and
// Y <= 1; saturating a table argument then only loses probabilities below
// e^-8 and never distorts the likely outcomes. With u = 1/r - 1:
//   r < 1/(1+X+Y)          <=> u > X + Y          -> A
//   r > (1+X)/(1+X+Y)      <=> u * (1 + X) < Y    -> C
//   otherwise                                     -> B
// so one random number samples a three-way choice without a divider. A
// blocked outcome has weight 0. The two e^-x tables give X and Y; the e^-2x
// table gives the p-bit weight exp(-2 * beta |I|), which doubles its range.
//
// At a p-int bound the choice is between staying and the one open step; the
// published description does not say how the chip handles bounds.
//
// Arguments are rounded to 1/16; they are never negative here and saturate
// just below 8, so probabilities below about 1/3000 are not resolved.
//
// Interface: all inputs come from registers (the cycle-1 D register, beta,
// random bits); the output 'upd' is combinational and is broadcast in the
// same clock.
module plu import pim_pkg::*; (
  input  elem_e             elem,
  input  beta_t             beta,
  input  logic [RNG_W-1:0]  r,
  input  pel_out_t          sel,
  output upd_t              upd
);

  localparam int unsigned VW = I_W + 2;               // doubled totals and their differences
  localparam int unsigned PW = VW + BETA_W + 1;
  localparam int unsigned SH = BETA_F + 1 - LUT_XF;   // product has BETA_F+1 fraction bits after /2

  typedef logic signed [VW-1:0]     val_t;
  typedef logic signed [LUT_AW-1:0] arg_t;

  // beta * v / 2, rounded to the LUT step and saturated to the LUT range.
  function automatic arg_t scale_arg(input val_t v, input beta_t b);
    logic signed [PW-1:0] vv;
    logic signed [PW-1:0] bb;
    logic signed [PW-1:0] p;
    vv = PW'(v);
    bb = PW'($signed({1'b0, b}));
    p  = vv * bb;
    p  = (p + (PW'(1) <<< (SH - 1))) >>> SH;
    if (p > PW'(2**(LUT_AW-1) - 1))
      return arg_t'(2**(LUT_AW-1) - 1);
    else if (p < -PW'(2**(LUT_AW-1)))
      return arg_t'(-(2**(LUT_AW-1)));
    else
      return arg_t'(p);
  endfunction

  // Scores: outcome o has weight exp(beta * s_o / 2) (totals are doubled).
  //   p-bit : s0 = 2I (+1), s2 = -2I (-1); outcome 1 unused
  //   p-int : s0 = 2I + J_ii (up), s1 = 0 (stay), s2 = -(2I - J_ii) (down)
  //   p-dit : s0..s2 = 2I^0 .. 2I^2
  val_t       s [3];
  logic [2:0] ok;
  logic [1:0] ref_o, b_o, c_o;
  val_t       d_b, d_c, pb_abs;
  arg_t       a_b, a_c, a_pb;
  wgt_t       w_b, w_c, w_pb, u;

  always_comb begin
    s[0] = val_t'(sel.i1);
    s[1] = val_t'(sel.i2);
    s[2] = val_t'(sel.i3);
    ok   = 3'b111;
    if (elem == EL_PBIT) begin
      s[0] = val_t'(sel.i3);
      s[1] = '0;
      s[2] = -val_t'(sel.i3);
      ok   = 3'b101;
    end else if (elem == EL_PINT) begin
      s[1] = '0;
      s[2] = -val_t'(sel.i2);
      ok   = {!sel.at_lo, 1'b1, !sel.at_hi};
    end
    // reference = most likely allowed outcome (lowest index on a tie)
    ref_o = 2'd1;
    if (ok[0] && (!ok[1] || s[0] >= s[1]) && (!ok[2] || s[0] >= s[2]))
      ref_o = 2'd0;
    else if (ok[2] && (!ok[1] || s[2] > s[1]))
      ref_o = 2'd2;
    b_o = (ref_o == 2'd0) ? 2'd1 : 2'd0;
    c_o = (ref_o == 2'd2) ? 2'd1 : 2'd2;
    // distances from the reference, never negative
    d_b    = s[ref_o] - s[b_o];
    d_c    = s[ref_o] - s[c_o];
    pb_abs = (s[0] < 0) ? -s[0] : s[0];
    a_b  = scale_arg(d_b, beta);
    a_c  = scale_arg(d_c, beta);
    a_pb = scale_arg(pb_abs, beta);
  end

  exp_lut #(.SCALE(1)) u_exp1  (.x(a_b),  .y(w_b));    // e^-x
  exp_lut #(.SCALE(2)) u_exp2x (.x(a_pb), .y(w_pb));   // e^-2x (p-bit)
  exp_lut #(.SCALE(1)) u_exp3  (.x(a_c),  .y(w_c));    // e^-x
  rinv_lut             u_rinv  (.r(r),    .u(u));      // 1/r - 1

  wgt_t                     wx, wy;
  logic [EXP_W:0]           sum_xy;
  logic [2*EXP_W:0]         lhs;
  logic [2*EXP_W:0]         rhs;
  logic                     pick_a, pick_c;
  logic [1:0]               out_o;
  logic signed [2:0]        k, nm;

  always_comb begin
    // weights of B and C relative to the reference; 0 for a blocked outcome
    wx     = ok[b_o] ? w_b : '0;
    wy     = !ok[c_o] ? '0 : ((elem == EL_PBIT) ? w_pb : w_c);
    sum_xy = {1'b0, wx} + {1'b0, wy};
    lhs    = (2*EXP_W+1)'(u) * (2*EXP_W+1)'({1'b0, wx} + (EXP_W+1)'(1 << EXP_F));
    rhs    = (2*EXP_W+1)'(wy) << EXP_F;
    pick_a = ({1'b0, u} > sum_xy) || (!ok[b_o] && !ok[c_o]);
    pick_c = !pick_a && ok[c_o] && (!ok[b_o] || lhs < rhs);
    out_o  = pick_a ? ref_o : (pick_c ? c_o : b_o);

    k   = 3'sd0;
    nm  = 3'sd1;
    upd = '0;
    unique case (elem)
      EL_PBIT: begin
        // new state +1 or -1; k = new - old
        nm = (out_o == 2'd0) ? 3'sd1 : -3'sd1;
        k  = nm - 3'(sel.m);
      end
      EL_PINT: begin
        k = (out_o == 2'd0) ? 3'sd1 : ((out_o == 2'd2) ? -3'sd1 : 3'sd0);
      end
      default: ;
    endcase
    if (elem == EL_PDIT) begin
      upd.from_dim = sel.m[1:0];
      upd.to_dim   = out_o;
      upd.moved    = (out_o != sel.m[1:0]);
    end else if (elem == EL_PBIT || elem == EL_PINT) begin
      upd.k     = k;
      upd.moved = (k != 3'sd0);
    end
  end

endmodule
