// State and update unit of the tiled PUBO solver.
//
// Holds the state vector (the candidate 3-SAT assignment), runs the solver and
// applies the focus+offset update rule, one algorithmic step per clock cycle:
//   * every tile reports whether one of its variables may flip (cand) and its
//     partial state with that flip applied (pstate);
//   * focus: if any tile proposes a flip, a random 1-from-N_tile encoder picks
//     one tile and its partial state is written into the state vector; the
//     E_offset accumulator is cleared;
//   * offset: if no tile proposes a flip, e_offset is added to the accumulator
//     (saturating), which the tiles' DACs subtract from every energy change, so
//     that a flip is induced on a later step.
// Annealing: the noise amplitude starts at amp0 and drops by one every
// anneal_period steps until it reaches zero (anneal_period = 0 keeps it).
// The run stops when the SAT checker reports all clauses satisfied (solved) or
// after max_steps steps.
//
// The rule (focus, offset, reset of the offset on a flip) and the split into a
// central unit with a 1-from-N_tile encoder follow the paper; the handshake,
// the linear annealing schedule, the step limit and saturation are this
// design's choices.
//
// Interface and timing: a one-cycle start pulse in any state loads init_state,
// clears steps and offset, loads amp0 and enters RUN_STEP. In RUN_STEP each
// cycle is one step: step_en is high, the tiles' PRNGs advance, and the state
// register takes the chosen partial state at the clock edge. The cycle on which
// sat is seen (or steps reaches max_steps) moves to RUN_DONE without a step;
// done stays high until the next start. steps counts steps taken.
module state_update_unit
  import pubo_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned N_COL  = N_COL_DEF,
  parameter int unsigned N_TILE = (N + N_COL - 1) / N_COL,
  parameter logic [31:0] SEED   = 32'h6A09_E667,
  localparam int unsigned TW    = (N_TILE > 1) ? $clog2(N_TILE) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // run control
  input  logic                          start,
  input  logic [N-1:0]                  init_state,
  input  amp_t                          amp0,
  input  logic [15:0]                   anneal_period,
  input  logic [7:0]                    e_offset,
  input  logic [31:0]                   max_steps,
  // from the tiles and the SAT checker
  input  logic [N_TILE-1:0]             tile_cand,
  input  logic [N_TILE-1:0][N_COL-1:0]  tile_pstate,
  input  logic                          sat,
  // to the tiles
  output logic [N-1:0]                  state,
  output offset_t                       offset,
  output amp_t                          amp,
  output logic                          step_en,
  // status
  output logic                          busy,
  output logic                          done,
  output logic                          solved,
  output logic [31:0]                   steps,
  output logic                          flip,
  output logic [TW-1:0]                 flip_tile
);

  localparam int unsigned NP = N_TILE * N_COL;

  initial assert (NP >= N) else $error("state_update_unit: N_TILE*N_COL < N");

  run_state_e          rs;
  logic [NP-1:0]       state_pad;
  logic [15:0]         anneal_cnt;
  logic [31:0]         rnd;
  logic [N_TILE-1:0]   tile_gnt;
  logic                any_cand;
  logic [NP-1:0]       next_pad;

  assign state   = state_pad[N-1:0];
  assign busy    = (rs == RUN_STEP);
  assign done    = (rs == RUN_DONE);
  assign step_en = (rs == RUN_STEP) && !sat && (steps != max_steps);
  assign flip    = step_en && any_cand;

  prng_xorshift32 #(.SEED(SEED)) u_prng (
    .clk, .rst_n, .en(step_en), .rnd
  );

  select_1_of_n #(.NREQ(N_TILE)) u_sel_tile (
    .req(tile_cand), .rnd(rnd[31:16]), .gnt(tile_gnt), .idx(flip_tile), .valid(any_cand)
  );

  // Write back the chosen tile's partial state.
  always_comb begin
    next_pad = state_pad;
    for (int unsigned t = 0; t < N_TILE; t++) begin
      if (tile_gnt[t]) next_pad[t*N_COL +: N_COL] = tile_pstate[t];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rs         <= RUN_IDLE;
      state_pad  <= '0;
      offset     <= '0;
      amp        <= '0;
      anneal_cnt <= '0;
      steps      <= '0;
      solved     <= 1'b0;
    end else if (start) begin
      rs         <= RUN_STEP;
      state_pad  <= NP'(init_state);
      offset     <= '0;
      amp        <= amp0;
      anneal_cnt <= '0;
      steps      <= '0;
      solved     <= 1'b0;
    end else if (rs == RUN_STEP) begin
      if (sat) begin
        rs     <= RUN_DONE;
        solved <= 1'b1;
      end else if (steps == max_steps) begin
        rs     <= RUN_DONE;
      end else begin
        steps <= steps + 1;
        if (any_cand) begin
          state_pad <= next_pad;
          offset    <= '0;
        end else begin
          offset <= (offset > offset_t'('1) - offset_t'(e_offset))
                    ? offset_t'('1) : offset + offset_t'(e_offset);
        end
        if (anneal_period != '0) begin
          if (anneal_cnt + 16'd1 >= anneal_period) begin
            anneal_cnt <= '0;
            if (amp != '0) amp <= amp - 1'b1;
          end else begin
            anneal_cnt <= anneal_cnt + 16'd1;
          end
        end
      end
    end
  end

  // Padding columns past N never change.
  if (NP > N) begin : g_pad_check
    always_ff @(posedge clk) begin
      if (rst_n) assert (state_pad[NP-1:N] == '0);
    end
  end

endmodule
