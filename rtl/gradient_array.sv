// Gradient array of one tile -- behavioural model of a 1T1R memristor crossbar.
//
// Each word line carries one product of state bits (from the CENC). Each of the
// N_COL variables of the tile owns two bit lines, one for positive and one for
// negative weights; the array sums, per bit line, the conductances of the
// devices on active word lines (a vector-matrix multiplication done by Ohm's
// and Kirchhoff's laws in silicon). The difference i_pos - i_neg is the partial
// derivative dE/ds_i of the PUBO energy. Currents are exact integers in units of
// one conductance level; device variation and IR drop are not modelled. The
// two-bit-lines-per-variable scheme and WBITS are this design's reading and
// choice, see the README.
//
// Interface: prog_we writes one whole row (all positive and negative
// conductances of word line prog_row) at the rising clock edge; conductances
// are non-volatile and not cleared by reset. i_pos/i_neg are combinational
// from wl.
module gradient_array
  import pubo_pkg::*;
#(
  parameter int unsigned N_COL = N_COL_DEF,
  parameter int unsigned N_WL  = N_WL_DEF,
  parameter int unsigned WBITS = WBITS_DEF,
  localparam int unsigned CW   = $clog2(N_WL * ((1 << WBITS) - 1) + 1)
) (
  input  logic                                clk,
  input  logic                                prog_we,
  input  logic [$clog2(N_WL)-1:0]             prog_row,
  input  logic [N_COL-1:0][WBITS-1:0]         prog_wpos,
  input  logic [N_COL-1:0][WBITS-1:0]         prog_wneg,
  input  logic [N_WL-1:0]                     wl,
  output logic [N_COL-1:0][CW-1:0]            i_pos,
  output logic [N_COL-1:0][CW-1:0]            i_neg
);

  logic [N_COL-1:0][WBITS-1:0] gpos [N_WL];
  logic [N_COL-1:0][WBITS-1:0] gneg [N_WL];

  always_ff @(posedge clk) begin
    if (prog_we) begin
      gpos[prog_row] <= prog_wpos;
      gneg[prog_row] <= prog_wneg;
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < N_COL; c++) begin
      logic [CW-1:0] sp, sn;
      sp = '0;
      sn = '0;
      for (int unsigned r = 0; r < N_WL; r++) begin
        if (wl[r]) begin
          sp = sp + CW'(gpos[r][c]);
          sn = sn + CW'(gneg[r][c]);
        end
      end
      i_pos[c] = sp;
      i_neg[c] = sn;
    end
  end

endmodule
