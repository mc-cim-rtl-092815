// Shared constants and types of the MC-CIM macro.
//
// The macro is a 16 x 31 8T-SRAM compute-in-memory array that evaluates the
// multiplication-free operator  w (+) x = sum_i sign(x_i)|w_i| + sign(w_i)|x_i|
// bitplane by bitplane, with in-memory dropout of input columns and output
// rows for Monte-Carlo Dropout inference. Array size (16 x 31), the 6-bit
// operand precision and the 5-bit conversion follow the paper; the row layout
// of one output neuron (one sign row plus NBITS-1 magnitude rows) and the
// sign-magnitude operand format are this design's choices.
package mc_cim_pkg;
  localparam int unsigned ROWS   = 16;            // SRAM rows (16 x 31 macro)
  localparam int unsigned COLS   = 31;            // SRAM columns, CL0..CL30
  localparam int unsigned NBITS  = 6;             // input/weight precision
  localparam int unsigned MAGB   = NBITS - 1;     // magnitude bitplanes
  localparam int unsigned NEUR   = ROWS / NBITS;  // output neurons held (2)
  localparam int unsigned ADCB   = 5;             // xADC resolution
  localparam int unsigned NRNG   = (COLS + 2*MAGB - 1) / (2*MAGB); // ceil(m/2(n-1)) = 4
  localparam int unsigned ITERS  = 30;            // MC-Dropout iterations per input
  localparam int unsigned PSW    = 16;            // product-sum width (signed)

  // Kind of one array evaluation inside the operator, for bitplane b:
  //   EV_NEGX : row |w|_b, CL = mask & sign(x)   -> count of negative-x terms
  //   EV_POSX : row |w|_b, CL = mask & ~sign(x)  -> count of positive-x terms
  //   EV_NEGW : row sign(w), CL = mask & |x|_b   -> count of negative-w terms
  typedef enum logic [1:0] {EV_NEGX = 2'd0, EV_POSX = 2'd1, EV_NEGW = 2'd2} ev_kind_e;

  // Source of dropout masks for each iteration.
  typedef enum logic {DO_SRC_RNG = 1'b0, DO_SRC_SCHED = 1'b1} do_src_e;
endpackage
