// pim_ctrl -- sequencer of the probabilistic Ising machine.
//
// Setup (idle): each setup write from the CPU side is either a global
// register write (element type, number of elements in use, run length,
// annealing parameters) or is put on the broadcast bus for one clock through
// the stage multiplexer: stage ST_J carries {column, J entry}, stage ST_IS a
// start value. The p-element whose ID equals 'index' stores it.
//
// Run: 'start' loads beta0 and picks the first element. Each iteration then
// takes two clocks, as in the published chip:
//   cycle 1 (S_SEL): the multiplexer shows the totals of element sel_idx;
//                    'cap' makes the top level's D register capture them.
//   cycle 2 (S_UPD): the PLU result is broadcast as stage ST_RUN with
//                    index = sel_idx; every p-element applies it at the end
//                    of this clock. At the same edge the index register
//                    takes the next random element, beta takes one annealing
//                    step and the iteration counter advances.
// The published schedule computes in the first clock and broadcasts in the
// second; here the PLU sits after the D register and its result is
// broadcast in the same (second) clock, so the next selection never sees a
// stale total.
//
// Random bits: one RAND_W-bit word per iteration. rand_bits[15:0] picks the
// element as (rand * n_elem) >> 16, so only elements 0..n_elem-1 are
// chosen; rand_bits[31:22] is the PLU's random code. rand_ack is high in
// each clock in which the word is used; the source presents a new word from
// the next clock on. 'done' pulses for one clock after the last iteration.
// Setup writes are accepted only while idle (asserted).
//
// Lint notes: rst_n is both the asynchronous reset of the registers and the
// 'disable iff' condition of the assertion, which Verilator reports as a net
// used both synchronously and asynchronously; the assertion is not logic.
// rand_bits[21:16] and the low 16 bits of the index product are unused on
// purpose (only the integer part of rand * n_elem / 2^16 is an index).
module pim_ctrl import pim_pkg::*; (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  cfg_req_t          cfg,
  input  logic              start,
  input  logic [RAND_W-1:0] rand_bits,
  output logic              rand_ack,
  input  upd_t              upd,
  input  idx_t              rd_idx,
  output bcast_t            bc,
  output idx_t              sel_idx,
  output logic              cap,
  output logic [RNG_W-1:0]  r,
  output elem_e             elem,
  output logic              anneal_load,
  output logic              anneal_step,
  output beta_t             beta0,
  output logic [15:0]       bstep,
  output beta_t             bmax,
  output logic              busy,
  output logic              done,
  output logic [ITER_W-1:0] iter
);

  typedef enum logic [1:0] {S_IDLE, S_SEL, S_UPD} state_e;

  state_e            st;
  idx_t              idx_q;
  logic [6:0]        n_elem;
  logic [ITER_W-1:0] n_iter;
  logic              last;
  logic              go;
  idx_t              pick;
  logic [22:0]       prod;

  // random element index in 0..n_elem-1
  always_comb begin
    prod = 23'(rand_bits[15:0]) * 23'(n_elem);
    pick = idx_t'(prod[22:16]);
  end

  assign go   = (st == S_IDLE) && start && (n_iter != '0);
  assign last = (iter + 1'b1 == n_iter);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      idx_q  <= '0;
      iter   <= '0;
      elem   <= EL_PBIT;
      n_elem <= 7'(N_ELEM);
      n_iter <= '0;
      beta0  <= beta_t'(1 << BETA_F);
      bstep  <= '0;
      bmax   <= '1;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (cfg_valid && cfg.op == OP_GLB) begin
            unique case (cfg.field)
              G_ELEM:     elem   <= elem_e'(cfg.data[1:0]);
              G_NELEM:    n_elem <= (cfg.data[6:0] == 7'd0 || cfg.data[6:0] > 7'(N_ELEM))
                                      ? 7'(N_ELEM) : cfg.data[6:0];
              G_NITER_LO: n_iter[15:0]  <= cfg.data;
              G_NITER_HI: n_iter[31:16] <= cfg.data;
              G_BETA0:    beta0  <= cfg.data;
              G_BSTEP:    bstep  <= cfg.data;
              G_BMAX:     bmax   <= cfg.data;
              default: ;
            endcase
          end
          if (go) begin
            idx_q <= pick;
            iter  <= '0;
            st    <= S_SEL;
          end
        end
        S_SEL: st <= S_UPD;
        S_UPD: begin
          idx_q <= pick;
          iter  <= iter + 1'b1;
          if (last) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            st <= S_SEL;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // stage multiplexer and broadcast bus
  always_comb begin
    bc       = '0;
    bc.stage = ST_RUN;
    if (st == S_UPD) begin
      bc.valid = 1'b1;
      bc.stage = ST_RUN;
      bc.index = idx_q;
      bc.val   = pack_upd(upd);
    end else if (st == S_IDLE && cfg_valid && cfg.op != OP_GLB) begin
      bc.valid = 1'b1;
      bc.index = cfg.index;
      if (cfg.op == OP_J) begin
        bc.stage = ST_J;
        bc.val   = pack_j(cfg.field, j_t'(cfg.data[J_W-1:0]));
      end else begin
        bc.stage = ST_IS;
        bc.val   = pack_is(field_e'(cfg.field[2:0]), cfg.data);
      end
    end
  end

  assign busy        = (st != S_IDLE);
  assign sel_idx     = busy ? idx_q : rd_idx;
  assign cap         = (st == S_SEL);
  assign r           = rand_bits[RAND_W-1 -: RNG_W];
  assign rand_ack    = go || (st == S_UPD);
  assign anneal_load = go;
  assign anneal_step = (st == S_UPD);

  // setup writes are only legal while idle
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_valid |-> !busy)
    else $error("setup write while the machine is running");

endmodule
