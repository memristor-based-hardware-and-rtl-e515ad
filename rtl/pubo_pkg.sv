// Shared constants and types of the tiled higher-order (PUBO) Hopfield 3-SAT solver.
//
// The problem sizes follow the paper's scalable configuration: a 150-variable
// problem split into ceil(150/19) = 8 tiles of 19 variables, each tile with 400
// gradient-array word lines. The widths of the analog quantities (weight levels,
// noise amplitude, offset accumulator, DAC code) are not given in the paper and
// are this design's choices. All analog currents are represented as integers in
// units of one weight LSB (one memristor conductance step).
package pubo_pkg;

  // Paper's sizes (defaults of every module).
  localparam int unsigned N_DEF     = 150;  // problem variables
  localparam int unsigned N_COL_DEF = 19;   // variables per tile
  localparam int unsigned N_WL_DEF  = 400;  // word lines per tile
  localparam int unsigned N_TILE_DEF = (N_DEF + N_COL_DEF - 1) / N_COL_DEF;  // 8

  // This design's choices.
  localparam int unsigned WBITS_DEF = 4;    // conductance levels per memristor: 0..15
  localparam int unsigned M_DEF     = 645;  // clause capacity (SATLIB uf150-645)
  localparam int unsigned AMPW      = 8;    // noise amplitude (annealing temperature)
  localparam int unsigned OW        = 12;   // E_offset accumulator, saturating
  localparam int unsigned DW        = 16;   // signed DAC code / gradient width

  typedef logic [AMPW-1:0]        amp_t;
  typedef logic [OW-1:0]          offset_t;
  typedef logic signed [DW-1:0]   dac_t;

  typedef enum logic [1:0] {
    RUN_IDLE = 2'd0,
    RUN_STEP = 2'd1,
    RUN_DONE = 2'd2
  } run_state_e;

endpackage
