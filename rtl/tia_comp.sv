// TIAs and comparators of one tile -- behavioural model of the analog read-out.
//
// For every variable column the transimpedance amplifiers turn the positive and
// negative bit-line currents into the gradient g = i_pos - i_neg = dE/ds_i. For
// a multilinear energy the energy change of flipping s_i is
//   dE_i = (1 - 2*s_i) * g,
// and the comparator accepts the flip as a candidate when
//   dE_i + dac < 0,
// where dac is the noise-minus-offset code of the noise DAC. With no noise and
// no offset only strictly downhill moves are candidates; a growing offset makes
// zero-change and then uphill moves candidates, which is the offset half of the
// paper's focus+offset rule. The exact comparison threshold is not given in the
// paper; this is this design's choice.
//
// Timing: purely combinational.
module tia_comp
  import pubo_pkg::*;
#(
  parameter int unsigned N_COL = N_COL_DEF,
  parameter int unsigned CW    = $clog2(N_WL_DEF * ((1 << WBITS_DEF) - 1) + 1)
) (
  input  logic [N_COL-1:0][CW-1:0] i_pos,
  input  logic [N_COL-1:0][CW-1:0] i_neg,
  input  dac_t [N_COL-1:0]         dac,
  input  logic [N_COL-1:0]         s,
  output logic [N_COL-1:0]         flip
);

  localparam int unsigned SW = (CW + 2 > DW ? CW + 2 : DW) + 1;

  always_comb begin
    for (int unsigned c = 0; c < N_COL; c++) begin
      logic signed [SW-1:0] g, de;
      g  = SW'($signed({1'b0, i_pos[c]})) - SW'($signed({1'b0, i_neg[c]}));
      de = s[c] ? -g : g;
      flip[c] = (de + SW'(dac[c])) < 0;
    end
  end

endmodule
