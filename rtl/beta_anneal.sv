// beta_anneal -- inverse-temperature register with a linear annealing ramp.
//
// Holds beta (UQ4.12) for the PLU. 'load' sets beta to beta0 at the start of
// a run; each 'step' (one per iteration) adds bstep, whose LSB is 2^-20, and
// stops at bmax. With bstep = 0 beta stays at beta0. The chip is described
// as updating the temperature once per iteration when annealing is used;
// the linear shape, the ceiling and the 2^-20 step resolution are this
// design's choices.
//
// Interface: load/step are single-cycle strobes sampled at the rising edge;
// beta changes at the edge after the strobe. load wins over step.
module beta_anneal import pim_pkg::*; #(
  parameter int unsigned ACC_F = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  beta_t       beta0,
  input  logic        step,
  input  logic [15:0] bstep,
  input  beta_t       bmax,
  output beta_t       beta
);

  localparam int unsigned AW = BETA_W + ACC_F;

  logic [AW-1:0] acc;
  logic [AW:0]   nxt;
  logic [AW:0]   lim;

  always_comb begin
    nxt = {1'b0, acc} + (AW+1)'(bstep);
    lim = {1'b0, bmax, ACC_F'(0)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      acc <= '0;
    else if (load)
      acc <= {beta0, ACC_F'(0)};
    else if (step && bstep != '0)
      acc <= (nxt > lim) ? lim[AW-1:0] : nxt[AW-1:0];
  end

  assign beta = acc[AW-1:ACC_F];

endmodule
