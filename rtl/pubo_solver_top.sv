// Tiled higher-order (PUBO) Hopfield solver for 3-SAT -- top level.
//
// An N-variable problem is split over N_TILE = ceil(N/N_COL) tiles. The state
// and update unit broadcasts the full state vector to every tile; each tile
// evaluates the energy changes of its N_COL variables with a configurable
// encoder (CENC) and a memristor gradient array, adds annealing noise and the
// E_offset term, and proposes at most one flip. The state unit takes one
// proposal (focus+offset rule), one step per clock cycle, until the SAT checker
// reports every clause satisfied or the step limit is reached.
//
// Programming (memristor write circuitry is not modelled; plain write ports):
//   row_we   writes, in tile row_tile, CENC row row_addr with pattern row_mask
//            and gradient-array row row_addr with conductances row_wpos/row_wneg.
//            Every row of every tile must be written once before a run; an
//            unused row gets zero conductances.
//   cl_we    writes clause cl_idx of the SAT checker (literal masks, act bit).
//            Every clause slot must be written once; unused slots with act = 0.
// Running: see state_update_unit (start pulse, done/solved, steps).
// The interconnect between the tiles and the state unit is the wiring below.
module pubo_solver_top
  import pubo_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned N_COL  = N_COL_DEF,
  parameter int unsigned N_WL   = N_WL_DEF,
  parameter int unsigned N_TILE = (N + N_COL - 1) / N_COL,
  parameter int unsigned WBITS  = WBITS_DEF,
  parameter int unsigned M      = M_DEF,
  localparam int unsigned TW    = (N_TILE > 1) ? $clog2(N_TILE) : 1,
  localparam int unsigned UW    = $clog2(M + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // gradient programming
  input  logic                        row_we,
  input  logic [TW-1:0]               row_tile,
  input  logic [$clog2(N_WL)-1:0]     row_addr,
  input  logic [N-1:0]                row_mask,
  input  logic [N_COL-1:0][WBITS-1:0] row_wpos,
  input  logic [N_COL-1:0][WBITS-1:0] row_wneg,
  // clause programming
  input  logic                        cl_we,
  input  logic [$clog2(M)-1:0]        cl_idx,
  input  logic [N-1:0]                cl_pos,
  input  logic [N-1:0]                cl_neg,
  input  logic                        cl_act,
  // run control
  input  logic                        start,
  input  logic [N-1:0]                init_state,
  input  amp_t                        amp0,
  input  logic [15:0]                 anneal_period,
  input  logic [7:0]                  e_offset,
  input  logic [31:0]                 max_steps,
  // results and status
  output logic [N-1:0]                state,
  output logic                        busy,
  output logic                        done,
  output logic                        solved,
  output logic [31:0]                 steps,
  output logic [UW-1:0]               n_unsat,
  output logic                        flip,
  output logic [TW-1:0]               flip_tile,
  output offset_t                     offset,
  output amp_t                        amp
);

  initial assert (N_TILE * N_COL >= N) else $error("pubo_solver_top: too few tiles");

  logic                         step_en, sat;
  logic [N_TILE-1:0]            tile_cand;
  logic [N_TILE-1:0][N_COL-1:0] tile_pstate;

  for (genvar t = 0; t < N_TILE; t++) begin : g_tile
    localparam int unsigned BASE    = t * N_COL;
    localparam int unsigned N_VALID = (N > BASE + N_COL) ? N_COL : ((N > BASE) ? N - BASE : 0);
    localparam logic [31:0] SEED_NOISE = 32'h2545_F491 ^ (32'(t) * 32'h0100_0193);
    localparam logic [31:0] SEED_SEL   = 32'h9E37_79B9 ^ (32'(t) * 32'h2710_0007);
    logic [(N_COL > 1 ? $clog2(N_COL) : 1)-1:0] flip_idx;

    pubo_tile #(
      .N(N), .N_COL(N_COL), .N_WL(N_WL), .WBITS(WBITS),
      .BASE(BASE), .N_VALID(N_VALID),
      .SEED_NOISE(SEED_NOISE), .SEED_SEL(SEED_SEL)
    ) u_tile (
      .clk, .rst_n,
      .en        (step_en),
      .state,
      .amp,
      .offset,
      .prog_we   (row_we && (row_tile == TW'(t))),
      .prog_row  (row_addr),
      .prog_mask (row_mask),
      .prog_wpos (row_wpos),
      .prog_wneg (row_wneg),
      .cand      (tile_cand[t]),
      .pstate    (tile_pstate[t]),
      .flip_idx
    );
  end

  sat_checker #(.N(N), .M(M)) u_sat (
    .clk,
    .prog_we  (cl_we),
    .prog_idx (cl_idx),
    .prog_pos (cl_pos),
    .prog_neg (cl_neg),
    .prog_act (cl_act),
    .state,
    .sat,
    .n_unsat
  );

  state_update_unit #(.N(N), .N_COL(N_COL), .N_TILE(N_TILE)) u_state (
    .clk, .rst_n,
    .start, .init_state, .amp0, .anneal_period, .e_offset, .max_steps,
    .tile_cand, .tile_pstate, .sat,
    .state, .offset, .amp, .step_en,
    .busy, .done, .solved, .steps, .flip, .flip_tile
  );

endmodule
