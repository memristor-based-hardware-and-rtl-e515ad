// Configurable encoder (CENC) of one tile -- behavioural model of a memristor
// array with its sense amplifiers.
//
// The CENC replaces the fixed AND-encoder (which forms every pairwise product of
// state bits) so that a tile only spends word lines on the products its gradient
// actually uses. The whole state vector enters on the CENC word lines; each of
// the N_WL horizontal CENC rows holds one programmed pattern and, through its
// TIA and comparator, drives one word line of the gradient array. A row is
// active when every state bit of its pattern is 1, i.e. the row forms the
// product of the selected state bits. An empty pattern is always active and
// serves as the bias (constant) row. The paper gives the function of the CENC;
// the current-threshold circuit is modelled here by the logical AND.
//
// Interface: prog_we writes the pattern prog_mask into row prog_row at the
// rising clock edge (memristor programming; the paper does not describe it).
// Patterns are non-volatile: reset does not clear them. wl is combinational
// from state.
module cenc_array
  import pubo_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned N_WL = N_WL_DEF
) (
  input  logic                    clk,
  input  logic                    prog_we,
  input  logic [$clog2(N_WL)-1:0] prog_row,
  input  logic [N-1:0]            prog_mask,
  input  logic [N-1:0]            state,
  output logic [N_WL-1:0]         wl
);

  logic [N-1:0] pattern [N_WL];

  always_ff @(posedge clk) begin
    if (prog_we) pattern[prog_row] <= prog_mask;
  end

  always_comb begin
    for (int unsigned r = 0; r < N_WL; r++) begin
      wl[r] = &(state | ~pattern[r]);
    end
  end

endmodule
