// elem_mux -- the N:1 multiplexer between the p-elements and the PLU.
//
// Passes the totals, state and bound flags of p-element 'sel' to 'out'. The
// published block diagram draws it with inputs 0..63 feeding the cycle-1
// register. In this design the same multiplexer also serves read-out of a
// p-element's state while the machine is idle (the controller then drives
// 'sel' from the read-out index). An out-of-range 'sel' (only possible when
// N is not a power of two) returns element 0.
//
// Interface: in[N], sel, out; combinational.
module elem_mux import pim_pkg::*; #(
  parameter int unsigned N = N_ELEM
) (
  input  pel_out_t               in [N],
  input  logic [$clog2(N)-1:0]   sel,
  output pel_out_t               out
);

  always_comb begin
    out = in[0];
    for (int k = 1; k < N; k++)
      if (sel == ($clog2(N))'(k)) out = in[k];
  end

endmodule
