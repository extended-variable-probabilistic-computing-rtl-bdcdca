// pim_pkg -- sizes, encodings and bus formats shared by the probabilistic
// Ising machine (PIM) with multi-purpose p-elements.
//
// The machine holds N_ELEM = 64 p-elements, each of which acts as a p-bit,
// a p-int (bounded integer) or an isotropic p-dit with N_DIM = 3 dimensions;
// the counts 64 and 3 follow the published chip. The element type is one
// global setting. Every p-element keeps its row of the coupling matrix J
// (64 one-byte entries) and three 16-bit running input totals; 64 + 3*2 = 70
// bytes per element, matching the stated per-element memory. All widths
// other than 64 and 3 are this design's own choices.
//
// The input totals are stored doubled (2*I) so that the half-integer
// self-coupling term J_ii/2 of the p-int update stays an integer.
//
// Fixed-point formats (this design's choice):
//   beta  : unsigned, BETA_W bits, BETA_F fraction bits (UQ4.12)
//   weight: unsigned, EXP_W bits, EXP_F fraction bits (UQ12.12), saturating
//   r     : RNG_W-bit code q standing for r = (q + 0.5) / 2^RNG_W
package pim_pkg;

  localparam int unsigned N_ELEM  = 64;
  localparam int unsigned IDX_W   = 6;     // $clog2(N_ELEM)
  localparam int unsigned N_DIM   = 3;
  localparam int unsigned J_W     = 8;
  localparam int unsigned I_W     = 16;
  localparam int unsigned M_W     = 8;
  localparam int unsigned BETA_W  = 16;
  localparam int unsigned BETA_F  = 12;
  localparam int unsigned RNG_W   = 10;
  localparam int unsigned EXP_W   = 24;
  localparam int unsigned EXP_F   = 12;
  localparam int unsigned LUT_AW  = 8;     // signed LUT argument width
  localparam int unsigned LUT_XF  = 4;     // LUT argument step 1/16
  localparam int unsigned RAND_W  = 32;    // random bits consumed per iteration
  localparam int unsigned ITER_W  = 32;

  typedef logic signed [J_W-1:0] j_t;
  typedef logic signed [I_W-1:0] itot_t;
  typedef logic signed [M_W-1:0] state_t;
  typedef logic [IDX_W-1:0]      idx_t;
  typedef logic [BETA_W-1:0]     beta_t;
  typedef logic [EXP_W-1:0]      wgt_t;

  // Global element type.
  typedef enum logic [1:0] {
    EL_PBIT = 2'd0,
    EL_PINT = 2'd1,
    EL_PDIT = 2'd2
  } elem_e;

  // Stage of the broadcast multiplexer: what the 'val' bus carries.
  typedef enum logic [1:0] {
    ST_J   = 2'd0,   // {column j, J_ij} written into element 'index'
    ST_IS  = 2'd1,   // start value of one field of element 'index'
    ST_RUN = 2'd2    // update of element 'index' (PLU result)
  } stage_e;

  // Field selector for ST_IS writes.
  typedef enum logic [2:0] {
    F_I1 = 3'd0,
    F_I2 = 3'd1,
    F_I3 = 3'd2,
    F_M  = 3'd3,
    F_LO = 3'd4,
    F_HI = 3'd5
  } field_e;

  // What the 64:1 multiplexer carries from the selected p-element.
  typedef struct packed {
    itot_t  i1;
    itot_t  i2;
    itot_t  i3;
    state_t m;
    logic   at_lo;
    logic   at_hi;
  } pel_out_t;

  // The PLU's 'change'.
  typedef struct packed {
    logic             moved;     // something changed; other elements must update
    logic signed [2:0] k;        // p-bit: -2/0/+2, p-int: -1/0/+1, p-dit: 0
    logic [1:0]       from_dim;  // p-dit: old dimension 0..2
    logic [1:0]       to_dim;    // p-dit: new dimension 0..2
  } upd_t;

  localparam int unsigned VAL_W = 3 + I_W;   // widest of the three formats

  // Broadcast to every p-element.
  typedef struct packed {
    logic             valid;
    stage_e           stage;
    idx_t             index;
    logic [VAL_W-1:0] val;
  } bcast_t;

  // Setup write from the CPU side.
  typedef enum logic [1:0] {
    OP_J   = 2'd0,   // J[index][field] <= data[7:0]
    OP_IS  = 2'd1,   // field 'field' of element 'index' <= data
    OP_GLB = 2'd2    // global register 'field' <= data
  } cfg_op_e;

  // Global register numbers for OP_GLB.
  localparam logic [5:0] G_ELEM      = 6'd0;  // element type
  localparam logic [5:0] G_NELEM     = 6'd1;  // number of p-elements in use, 1..64
  localparam logic [5:0] G_NITER_LO  = 6'd2;  // iterations per run, low 16 bits
  localparam logic [5:0] G_NITER_HI  = 6'd3;  // iterations per run, high 16 bits
  localparam logic [5:0] G_BETA0     = 6'd4;  // starting beta, UQ4.12
  localparam logic [5:0] G_BSTEP     = 6'd5;  // beta increment per iteration, UQ4.20
  localparam logic [5:0] G_BMAX      = 6'd6;  // beta ceiling, UQ4.12

  typedef struct packed {
    cfg_op_e     op;
    idx_t        index;
    logic [5:0]  field;
    logic [15:0] data;
  } cfg_req_t;

  // val formats
  function automatic logic [VAL_W-1:0] pack_j(input idx_t col, input j_t w);
    return VAL_W'({col, w});
  endfunction

  function automatic logic [VAL_W-1:0] pack_is(input field_e f, input logic [15:0] d);
    return VAL_W'({f, d});
  endfunction

  function automatic logic [VAL_W-1:0] pack_upd(input upd_t u);
    return VAL_W'(u);
  endfunction

endpackage
