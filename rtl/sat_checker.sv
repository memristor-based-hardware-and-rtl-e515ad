// SAT checker -- behavioural model of a clause crossbar with threshold read-out.
//
// Stops the search as soon as the state vector satisfies the formula. In
// silicon the state drives the word lines of a crossbar whose bit lines are
// clauses, and a clause counts as satisfied when its current exceeds the
// threshold that represents zero. Here each clause is a pair of literal masks:
// it is satisfied when some positive literal's variable is 1 or some negative
// literal's variable is 0. Clauses with act = 0 are ignored, so a smaller
// formula fits in the M clause slots.
//
// The paper introduces this checker for its quadratic solver; using it as the
// stop condition of the higher-order solver is this design's choice.
//
// Interface: prog_we writes clause prog_idx at the rising clock edge (not
// cleared by reset). sat and n_unsat are combinational from state.
module sat_checker
  import pubo_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned M  = M_DEF,
  localparam int unsigned UW = $clog2(M + 1)
) (
  input  logic                 clk,
  input  logic                 prog_we,
  input  logic [$clog2(M)-1:0] prog_idx,
  input  logic [N-1:0]         prog_pos,
  input  logic [N-1:0]         prog_neg,
  input  logic                 prog_act,
  input  logic [N-1:0]         state,
  output logic                 sat,
  output logic [UW-1:0]        n_unsat
);

  logic [N-1:0] pos [M];
  logic [N-1:0] neg [M];
  logic [M-1:0] act;

  always_ff @(posedge clk) begin
    if (prog_we) begin
      pos[prog_idx] <= prog_pos;
      neg[prog_idx] <= prog_neg;
      act[prog_idx] <= prog_act;
    end
  end

  always_comb begin
    n_unsat = '0;
    for (int unsigned m = 0; m < M; m++) begin
      if (act[m] && !(|(state & pos[m]) || |(~state & neg[m])))
        n_unsat = n_unsat + 1'b1;
    end
    sat = (n_unsat == '0);
  end

endmodule
