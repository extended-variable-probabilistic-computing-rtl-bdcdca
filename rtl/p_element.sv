// p_element -- one multi-purpose probabilistic element (p-bit, p-int or
// isotropic p-dit with three dimensions).
//
// Storage: its row of the coupling matrix, J[ID][0..63] (one byte each),
// three running input totals acc[0..2] (16 bits each, held doubled), its
// state m and, for p-ints, the bounds lo..hi. The 64-byte row plus the three
// two-byte totals make the 70 bytes per element of the published chip; the
// state and bound registers are this design's addition.
//
// Every element listens to one broadcast bus (index, val, stage). In the two
// setup stages the element named by 'index' stores a J entry (ST_J) or a
// start value (ST_IS: a total, the state or a bound); the start totals
// already contain the bias h and the coupling to the initial states. In the
// run stage every element applies the update of element j = index:
//   p-bit / p-int : acc[0] += 2 * J[ID][j] * k          (k = change of m_j)
//   p-dit         : acc[to] += 4 * J[ID][j], acc[from] -= 4 * J[ID][j]
// (Eqs. 16, 25 and, for p-dits, Eqs. 19/21), and element j itself also
// moves its state. The self-coupling J_ii enters through the same rule.
//
// Outputs toward the multiplexer, as the element type dictates:
//   p-bit/p-int : i1 = 2I + J_ii, i2 = 2I - J_ii, i3 = 2I
//   p-dit       : i1..i3 = 2 I^1 .. 2 I^3
// plus the state and, for p-ints, flags "at lower / upper bound".
//
// Timing: all writes happen at the rising clock edge at which bc.valid is
// high; outputs are combinational from the registers. Totals wrap at 16 bits,
// so a problem must keep |2I| below 2^15. Asynchronous active-low reset
// clears everything.
module p_element import pim_pkg::*; #(
  parameter idx_t ID = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  elem_e    elem,
  input  bcast_t   bc,
  output pel_out_t q
);

  j_t     jrow [N_ELEM];
  itot_t  acc  [N_DIM];
  state_t m, lo, hi;

  // views of the val bus
  idx_t        wr_col;
  j_t          wr_j;
  field_e      wr_field;
  logic [15:0] wr_data;
  upd_t        u;
  j_t          jsel;
  itot_t       dstep;   // 2 * J * k
  itot_t       dquad;   // 4 * J

  always_comb begin
    {wr_col, wr_j}      = bc.val[IDX_W+J_W-1:0];
    {wr_field, wr_data} = bc.val;
    u                   = upd_t'(bc.val[$bits(upd_t)-1:0]);
    jsel                = jrow[bc.index];
    dstep               = itot_t'(2 * int'(jsel) * int'(u.k));
    dquad               = itot_t'(4 * int'(jsel));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      jrow <= '{default: '0};
      acc  <= '{default: '0};
      m    <= '0;
      lo   <= '0;
      hi   <= '0;
    end else if (bc.valid) begin
      unique case (bc.stage)
        ST_J: begin
          if (bc.index == ID) jrow[wr_col] <= wr_j;
        end
        ST_IS: begin
          if (bc.index == ID) begin
            unique case (wr_field)
              F_I1:    acc[0] <= itot_t'(wr_data);
              F_I2:    acc[1] <= itot_t'(wr_data);
              F_I3:    acc[2] <= itot_t'(wr_data);
              F_M:     m      <= state_t'(wr_data);
              F_LO:    lo     <= state_t'(wr_data);
              F_HI:    hi     <= state_t'(wr_data);
              default: ;
            endcase
          end
        end
        ST_RUN: begin
          if (u.moved) begin
            if (elem == EL_PDIT) begin
              acc[u.to_dim]   <= acc[u.to_dim]   + dquad;
              acc[u.from_dim] <= acc[u.from_dim] - dquad;
              if (bc.index == ID) m <= state_t'(u.to_dim);
            end else begin
              acc[0] <= acc[0] + dstep;
              if (bc.index == ID) m <= m + state_t'(u.k);
            end
          end
        end
        default: ;
      endcase
    end
  end

  itot_t jself;
  assign jself = itot_t'(jrow[ID]);

  always_comb begin
    q.m     = m;
    q.at_lo = (elem == EL_PINT) && (m <= lo);
    q.at_hi = (elem == EL_PINT) && (m >= hi);
    if (elem == EL_PDIT) begin
      q.i1 = acc[0];
      q.i2 = acc[1];
      q.i3 = acc[2];
    end else begin
      q.i1 = acc[0] + jself;
      q.i2 = acc[0] - jself;
      q.i3 = acc[0];
    end
  end

endmodule
