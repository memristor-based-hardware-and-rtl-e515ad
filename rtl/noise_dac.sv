// Noise DAC of one tile -- behavioural model of an analog/mixed-signal part.
//
// In silicon this is a current DAC that injects a random current into every
// gradient column so that the Hopfield network can climb out of local minima
// (simulated annealing). Here the injected current is an integer in units of
// one weight LSB, computed combinationally from one 32-bit PRNG word.
//
// Per column c: r = the PRNG word rotated right by 5*c; the noise magnitude is
// (r[7:0] * amp) >> 8, uniform in [0, amp), with sign r[8]. The paper gives no
// noise distribution; this is this design's choice. The same DAC also injects
// the E_offset term of the focus+offset update rule, so the output code is
//   dac[c] = noise[c] - offset.
// A negative code makes a flip more likely (see tia_comp).
//
// Timing: purely combinational; a new PRNG word every cycle gives new noise.
module noise_dac
  import pubo_pkg::*;
#(
  parameter int unsigned N_COL = N_COL_DEF
) (
  input  logic [31:0]          rnd,
  input  amp_t                 amp,
  input  offset_t              offset,
  output dac_t [N_COL-1:0]     dac
);

  always_comb begin
    for (int unsigned c = 0; c < N_COL; c++) begin
      logic [63:0] twice;
      logic [31:0] r;
      logic [15:0] prod;
      logic signed [DW-1:0] noise;
      twice = {rnd, rnd} >> ((5 * c) % 32);
      r     = twice[31:0];
      prod  = r[7:0] * amp;
      noise = r[8] ? -$signed({{(DW-8){1'b0}}, prod[15:8]})
                   :  $signed({{(DW-8){1'b0}}, prod[15:8]});
      dac[c] = noise - $signed({{(DW-OW){1'b0}}, offset});
    end
  end

endmodule
