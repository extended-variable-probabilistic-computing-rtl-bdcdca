// exp_lut -- exponential weight table of the probabilistic logic unit.
//
// Returns y = exp(-SCALE * x) for a signed argument x whose LSB is 2^-XF
// (default 1/16, range [-8, 8)). The result is unsigned fixed point with OF
// fraction bits and saturates at all-ones. The PLU of the published chip
// holds tables labelled e^-x (SCALE = 1) and e^-2x (SCALE = 2); their size,
// argument step and output format are this design's choices. The table is
// filled at elaboration from exp() and indexed by the raw bits of x, so it
// maps to a 2^AW-entry ROM.
//
// Interface: x in, y out, purely combinational (no clock, no latency).
module exp_lut import pim_pkg::*; #(
  parameter int unsigned SCALE = 1,
  parameter int unsigned AW    = LUT_AW,
  parameter int unsigned XF    = LUT_XF,
  parameter int unsigned OW    = EXP_W,
  parameter int unsigned OF    = EXP_F
) (
  input  logic signed [AW-1:0] x,
  output logic        [OW-1:0] y
);

  typedef logic [OW-1:0] tab_t [2**AW];

  function automatic tab_t gen_tab();
    tab_t t;
    real  v;
    real  vmax;
    int   s;
    vmax = 2.0 ** OW - 1.0;
    for (int k = 0; k < 2**AW; k++) begin
      s = (k >= 2**(AW-1)) ? k - 2**AW : k;
      v = $exp(-real'(SCALE) * real'(s) / (2.0 ** XF)) * (2.0 ** OF);
      if (v >= vmax) t[k] = '1;
      else           t[k] = OW'(longint'(v));   // real-to-integer cast rounds
    end
    return t;
  endfunction

  localparam tab_t TAB = gen_tab();

  assign y = TAB[$unsigned(x)];

endmodule
