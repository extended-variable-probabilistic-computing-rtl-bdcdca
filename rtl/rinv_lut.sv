// rinv_lut -- the "1/r - 1" table of the probabilistic logic unit.
//
// A random code q of RW bits stands for r = (q + 0.5) / 2^RW, uniform in
// (0, 1). The table returns u = 1/r - 1 as unsigned fixed point with OF
// fraction bits, saturating at all-ones. With u in hand the PLU tests
// r < 1 / (1 + S) as u > S, so no divider is needed; the table itself is
// named in the published block diagram, its size and format are this
// design's choices. Contents are computed at elaboration.
//
// Interface: r in, u out, purely combinational.
module rinv_lut import pim_pkg::*; #(
  parameter int unsigned RW = RNG_W,
  parameter int unsigned OW = EXP_W,
  parameter int unsigned OF = EXP_F
) (
  input  logic [RW-1:0] r,
  output logic [OW-1:0] u
);

  typedef logic [OW-1:0] tab_t [2**RW];

  function automatic tab_t gen_tab();
    tab_t t;
    real  rr;
    real  v;
    real  vmax;
    vmax = 2.0 ** OW - 1.0;
    for (int q = 0; q < 2**RW; q++) begin
      rr = (real'(q) + 0.5) / (2.0 ** RW);
      v  = (1.0 / rr - 1.0) * (2.0 ** OF);
      if (v >= vmax) t[q] = '1;
      else           t[q] = OW'(longint'(v));
    end
    return t;
  endfunction

  localparam tab_t TAB = gen_tab();

  assign u = TAB[r];

endmodule
