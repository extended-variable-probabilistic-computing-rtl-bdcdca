// pim_top -- probabilistic Ising machine with 64 multi-purpose p-elements.
//
// Structure (after the published block diagram of the chip's PIM area):
//   64 x p_element  -- J rows, running input totals, states, bounds
//   elem_mux        -- 64:1 multiplexer, select = index register
//   D register      -- captures the selected element's totals (cycle 1)
//   plu             -- beta scaling, exponential and 1/r-1 tables, decision
//   beta_anneal     -- inverse temperature with a linear annealing ramp
//   pim_ctrl        -- setup writes, two-clock update schedule, stage mux
//
// CPU side (the CPU itself is not part of this RTL): setup writes
// (cfg_valid/cfg), 'start', one 32-bit random word per iteration
// (rand_bits, consumed when rand_ack is high), and read-out: while idle,
// rd_q shows the totals, state and bound flags of p-element rd_idx, one
// clock after the last write. One iteration (one p-element update) takes two
// clocks; a run of N iterations takes 2N clocks from the clock after 'start'
// until 'done'.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously because the controller's setup assertion is disabled
// during reset; every register here uses it as an asynchronous reset.
module pim_top import pim_pkg::*; (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  cfg_req_t          cfg,
  input  logic              start,
  input  logic [RAND_W-1:0] rand_bits,
  output logic              rand_ack,
  input  idx_t              rd_idx,
  output pel_out_t          rd_q,
  output logic              busy,
  output logic              done,
  output logic [ITER_W-1:0] iter,
  output beta_t             beta
);

  elem_e            elem;
  bcast_t           bc;
  idx_t             sel_idx;
  logic             cap;
  logic [RNG_W-1:0] r;
  logic             anneal_load, anneal_step;
  beta_t            beta0, bmax;
  logic [15:0]      bstep;
  upd_t             upd;
  pel_out_t         pe_q [N_ELEM];
  pel_out_t         mux_q;
  pel_out_t         dreg;

  for (genvar g = 0; g < N_ELEM; g++) begin : g_pe
    p_element #(.ID(idx_t'(g))) u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .elem  (elem),
      .bc    (bc),
      .q     (pe_q[g])
    );
  end

  elem_mux #(.N(N_ELEM)) u_mux (
    .in  (pe_q),
    .sel (sel_idx),
    .out (mux_q)
  );

  // cycle-1 register between the multiplexer and the PLU
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   dreg <= '0;
    else if (cap) dreg <= mux_q;
  end

  plu u_plu (
    .elem (elem),
    .beta (beta),
    .r    (r),
    .sel  (dreg),
    .upd  (upd)
  );

  beta_anneal u_beta (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (anneal_load),
    .beta0 (beta0),
    .step  (anneal_step),
    .bstep (bstep),
    .bmax  (bmax),
    .beta  (beta)
  );

  pim_ctrl u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .cfg_valid   (cfg_valid),
    .cfg         (cfg),
    .start       (start),
    .rand_bits   (rand_bits),
    .rand_ack    (rand_ack),
    .upd         (upd),
    .rd_idx      (rd_idx),
    .bc          (bc),
    .sel_idx     (sel_idx),
    .cap         (cap),
    .r           (r),
    .elem        (elem),
    .anneal_load (anneal_load),
    .anneal_step (anneal_step),
    .beta0       (beta0),
    .bstep       (bstep),
    .bmax        (bmax),
    .busy        (busy),
    .done        (done),
    .iter        (iter)
  );

  assign rd_q = mux_q;

endmodule
