// Testbench for pubo_tile: a 12-variable problem, tile covering variables 5..9
// with only 4 of its 5 columns in use (like the last tile of a problem).
// Random CENC patterns and conductances are programmed; for random states and
// offsets the testbench computes word lines, column gradients and energy
// changes itself. Without noise the candidate set is exact and the tile must
// flip exactly one of its members (or none when empty); with noise the flip
// must be within the noise allowance and must happen when certain. The unused
// column must never flip, and every used column must be chosen at some point.
module tb_pubo_tile;
  import pubo_pkg::*;
  localparam int N = 12, NC = 5, NWL = 24, WB = 4, BASE = 5, NVAL = 4;
  logic clk = 0, rst_n = 0, en = 0, prog_we = 0, cand;
  logic [N-1:0] state, prog_mask;
  amp_t amp;
  offset_t offset;
  logic [$clog2(NWL)-1:0] prog_row;
  logic [NC-1:0][WB-1:0] prog_wpos, prog_wneg;
  logic [NC-1:0] pstate;
  logic [2:0] flip_idx;
  logic [N-1:0] pat [NWL];
  int wp [NWL][NC], wn [NWL][NC];
  int checks = 0, failures = 0, chosen [NC], n_none = 0, n_noise = 0;

  pubo_tile #(.N(N), .N_COL(NC), .N_WL(NWL), .WBITS(WB), .BASE(BASE), .N_VALID(NVAL)) dut (
    .clk, .rst_n, .en, .state, .amp, .offset, .prog_we, .prog_row, .prog_mask,
    .prog_wpos, .prog_wneg, .cand, .pstate, .flip_idx);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NWL; r++) begin
      pat[r] = '0;
      if (r > 0) repeat ($urandom_range(1, 2)) pat[r][$urandom_range(0, N-1)] = 1'b1;
      for (int c = 0; c < NC; c++) begin
        wp[r][c] = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 15) : 0;
        wn[r][c] = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 15) : 0;
        prog_wpos[c] = WB'(wp[r][c]);
        prog_wneg[c] = WB'(wn[r][c]);
      end
      @(negedge clk);
      prog_we = 1; prog_row = r[$clog2(NWL)-1:0]; prog_mask = pat[r];
      @(negedge clk);
      prog_we = 0;
    end
    en = 1;
    for (int k = 0; k < 3000; k++) begin
      int de [NC];
      int nmax, must, lo;
      bit any;
      logic [NC-1:0] sl;
      state  = N'($urandom);
      amp    = (k < 2000) ? 8'd0 : amp_t'($urandom_range(1, 40));
      offset = offset_t'($urandom_range(0, 30));
      nmax   = (amp == 0) ? 0 : int'(amp) - 1;
      must = 0; any = 0;
      for (int c = 0; c < NC; c++) begin
        automatic int g = 0;
        sl[c] = state[BASE + c];
        for (int r = 0; r < NWL; r++) if ((state & pat[r]) == pat[r]) g += wp[r][c] - wn[r][c];
        de[c] = sl[c] ? -g : g;
        if (c < NVAL && de[c] - int'(offset) < 0) any = 1;
        if (c < NVAL && de[c] + nmax - int'(offset) < 0) must = 1;
      end
      #1;
      if (amp == 0) begin
        chk(cand == any, $sformatf("candidate exists k=%0d", k));
        if (!any) begin chk(pstate == sl, "no flip"); n_none++; end
      end else begin
        n_noise++;
        if (must) chk(cand, "certain flip taken");
      end
      if (cand) begin
        automatic int f = -1, nf = 0;
        for (int c = 0; c < NC; c++) if (pstate[c] != sl[c]) begin nf++; f = c; end
        chk(nf == 1, $sformatf("exactly one flip nf=%0d p=%b sl=%b idx=%0d", nf, pstate, sl, flip_idx));
        if (nf == 1) begin
          chk(f < NVAL, "unused column never flips");
          chk(int'(flip_idx) == f, "flip_idx");
          chk(de[f] - nmax - int'(offset) < 0, $sformatf("flip allowed c=%0d de=%0d", f, de[f]));
          chosen[f]++;
        end
      end else chk(pstate == sl, "no flip without cand");
      @(negedge clk);
    end
    for (int c = 0; c < NVAL; c++) chk(chosen[c] > 0, $sformatf("column %0d never chosen", c));
    chk(n_none > 0, "empty candidate set seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
