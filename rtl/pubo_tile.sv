// One tile of the scalable PUBO solver.
//
// A tile evaluates N_COL variables of an N-variable problem, the variables
// BASE .. BASE+N_COL-1 (only the first N_VALID exist; the last tile of a
// problem may be partly empty). It receives the full state vector and, within
// the same clock cycle:
//   1. the CENC turns the state into N_WL word-line activations (products of
//      state bits programmed per row);
//   2. the gradient array sums the weights of the active rows per variable
//      into a positive and a negative bit-line current;
//   3. a PRNG feeds the noise DAC, whose code (noise minus the E_offset
//      accumulator) is added to each column;
//   4. TIA & comparators mark every variable whose flip is accepted;
//   5. a second PRNG drives the 1-from-N_col encoder, which picks one of them.
// The tile outputs cand (some variable may flip) and pstate, its slice of the
// state vector with the chosen variable flipped. The state unit picks one tile
// and writes that partial state back. This block structure is the paper's
// (CENC, TIA & COMP, array, T & C, PRNG, DAC, 1-from-N_col); keeping the whole
// evaluation combinational, one step per cycle, and the two-PRNG split are this
// design's choices.
//
// Interface: en advances both PRNGs (one step per cycle while the solver runs).
// prog_we writes CENC pattern and gradient row prog_row together.
module pubo_tile
  import pubo_pkg::*;
#(
  parameter int unsigned N          = N_DEF,
  parameter int unsigned N_COL      = N_COL_DEF,
  parameter int unsigned N_WL       = N_WL_DEF,
  parameter int unsigned WBITS      = WBITS_DEF,
  parameter int unsigned BASE       = 0,
  parameter int unsigned N_VALID    = N_COL,
  parameter logic [31:0] SEED_NOISE = 32'h2545_F491,
  parameter logic [31:0] SEED_SEL   = 32'h9E37_79B9,
  localparam int unsigned CW        = $clog2(N_WL * ((1 << WBITS) - 1) + 1),
  localparam int unsigned IW        = (N_COL > 1) ? $clog2(N_COL) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic [N-1:0]                state,
  input  amp_t                        amp,
  input  offset_t                     offset,
  input  logic                        prog_we,
  input  logic [$clog2(N_WL)-1:0]     prog_row,
  input  logic [N-1:0]                prog_mask,
  input  logic [N_COL-1:0][WBITS-1:0] prog_wpos,
  input  logic [N_COL-1:0][WBITS-1:0] prog_wneg,
  output logic                        cand,
  output logic [N_COL-1:0]            pstate,
  output logic [IW-1:0]               flip_idx
);

  logic [N_WL-1:0]          wl;
  logic [N_COL-1:0][CW-1:0] i_pos, i_neg;
  dac_t [N_COL-1:0]         dac;
  logic [31:0]              rnd_noise, rnd_sel;
  logic [N_COL-1:0]         s_loc, flip_raw, flip_ok, gnt;

  // Local slice of the state vector; columns past N read as 0.
  always_comb begin
    for (int unsigned c = 0; c < N_COL; c++) begin
      s_loc[c]   = (BASE + c < N) ? state[BASE + c] : 1'b0;
      flip_ok[c] = flip_raw[c] && (c < N_VALID);
    end
  end

  cenc_array #(.N(N), .N_WL(N_WL)) u_cenc (
    .clk, .prog_we, .prog_row, .prog_mask, .state, .wl
  );

  gradient_array #(.N_COL(N_COL), .N_WL(N_WL), .WBITS(WBITS)) u_array (
    .clk, .prog_we, .prog_row, .prog_wpos, .prog_wneg, .wl, .i_pos, .i_neg
  );

  prng_xorshift32 #(.SEED(SEED_NOISE)) u_prng_noise (
    .clk, .rst_n, .en, .rnd(rnd_noise)
  );

  noise_dac #(.N_COL(N_COL)) u_dac (
    .rnd(rnd_noise), .amp, .offset, .dac
  );

  tia_comp #(.N_COL(N_COL), .CW(CW)) u_tc (
    .i_pos, .i_neg, .dac, .s(s_loc), .flip(flip_raw)
  );

  prng_xorshift32 #(.SEED(SEED_SEL)) u_prng_sel (
    .clk, .rst_n, .en, .rnd(rnd_sel)
  );

  select_1_of_n #(.NREQ(N_COL)) u_sel (
    .req(flip_ok), .rnd(rnd_sel[31:16]), .gnt, .idx(flip_idx), .valid(cand)
  );

  assign pstate = s_loc ^ gnt;

endmodule
