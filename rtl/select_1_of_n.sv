// Random 1-from-n encoder.
//
// Among the raised request lines it grants exactly one, chosen by a rotating
// priority whose starting point is random: start = (rnd * NREQ) >> 16, and the
// grant goes to the first request at or after start, wrapping around. The
// paper names 1-from-N_col encoders in the tiles and a 1-from-N_tile encoder in
// the state unit but does not give their insides; this is the simplest random
// choice. It is not exactly uniform over the raised requests (a request that
// follows a run of idle lines is favoured).
//
// Timing: purely combinational. valid is low and gnt all zero when no request
// is raised.
module select_1_of_n #(
  parameter int unsigned NREQ = 19,
  localparam int unsigned IW  = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic [NREQ-1:0] req,
  input  logic [15:0]     rnd,
  output logic [NREQ-1:0] gnt,
  output logic [IW-1:0]   idx,
  output logic            valid
);

  always_comb begin
    int unsigned start, j;
    logic [31:0] prod;
    prod  = 32'(rnd) * 32'(NREQ);
    start = int'(prod >> 16);
    gnt   = '0;
    idx   = '0;
    valid = 1'b0;
    for (int unsigned k = 0; k < NREQ; k++) begin
      j = (start + k) % NREQ;
      if (!valid && req[j]) begin
        valid  = 1'b1;
        gnt[j] = 1'b1;
        idx    = IW'(j);
      end
    end
  end

  always_comb assert ($onehot0(gnt));

endmodule
