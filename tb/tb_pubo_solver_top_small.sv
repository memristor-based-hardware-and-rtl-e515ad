// End-to-end testbench of pubo_solver_top at reduced size: 40 variables in
// 4 tiles of 10, 200 word lines per tile, 170 clauses (4.23 per variable).
// A random planted 3-SAT instance is generated, mapped onto the tiles' CENC
// patterns and gradient rows, and programmed; the solver then runs from a
// random state with annealing noise until the SAT checker stops it. Every step
// is checked against an energy model computed from the clauses alone: the SAT
// checker's count, at most one flip per step, a flip is taken whenever one is
// certain whatever the noise, the flipped variable's energy change is within
// the noise and offset allowance, offset and step bookkeeping. A second run
// hits the step limit. Each mechanism (downhill, zero/uphill and
// offset-induced flips, offset accumulation, annealing, several tiles
// proposing at once, last tile, both stop conditions) must occur.
module tb_pubo_solver_top_small;
  localparam int NV = 40, NC = 10, NWL = 200, NT = 4, WB = 4, MCAP = 170, MCL = 170;
  localparam logic [7:0] AMP0 = 8'd3;
  localparam logic [15:0] APER = 16'd64;
  localparam logic [31:0] MAXS = 32'd20000;
  localparam int WATCHDOG = 200000;

  import pubo_pkg::*;
  import sat3_pkg::*;

  localparam int TW = (NT > 1) ? $clog2(NT) : 1;
  localparam int UW = $clog2(MCAP + 1);

  logic clk = 0, rst_n = 0;
  logic row_we = 0, cl_we = 0, cl_act = 0, start = 0;
  logic [TW-1:0] row_tile;
  logic [$clog2(NWL)-1:0] row_addr;
  logic [NV-1:0] row_mask, cl_pos, cl_neg, init_state, state;
  logic [NC-1:0][WB-1:0] row_wpos, row_wneg;
  logic [$clog2(MCAP)-1:0] cl_idx;
  amp_t amp0, amp;
  logic [15:0] anneal_period;
  logic [7:0] e_offset;
  logic [31:0] max_steps, steps;
  logic busy, done, solved, flip;
  logic [UW-1:0] n_unsat;
  logic [TW-1:0] flip_tile;
  offset_t offset;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_flip = 0, n_downhill = 0, n_uphill_or_zero = 0, n_idle = 0, n_offset_flip = 0;
  int n_anneal = 0, n_contention = 0, n_last_tile = 0, n_sat_stop = 0, n_max_stop = 0;

  Sat3Instance inst;

  pubo_solver_top #(.N(NV), .N_COL(NC), .N_WL(NWL), .N_TILE(NT), .WBITS(WB), .M(MCAP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic void to_bits(input logic [NV-1:0] v, ref bit x[]);
    x = new[NV];
    for (int i = 0; i < NV; i++) x[i] = v[i];
  endfunction

  task automatic program_all();
    for (int t = 0; t < NT; t++) begin
      for (int r = 0; r < NWL; r++) begin
        int q = t*NWL + r;
        @(negedge clk);
        row_we = 1; row_tile = TW'(t); row_addr = r[$clog2(NWL)-1:0];
        row_mask = '0;
        if (inst.row_j[q] >= 0) row_mask[inst.row_j[q]] = 1'b1;
        if (inst.row_k[q] >= 0) row_mask[inst.row_k[q]] = 1'b1;
        for (int c = 0; c < NC; c++) begin
          int w = inst.coef[q*NC + c];
          row_wpos[c] = (w > 0) ? WB'(w) : '0;
          row_wneg[c] = (w < 0) ? WB'(-w) : '0;
        end
      end
    end
    @(negedge clk);
    row_we = 0;
    for (int k = 0; k < MCAP; k++) begin
      @(negedge clk);
      cl_we = 1; cl_idx = k[$clog2(MCAP)-1:0]; cl_pos = '0; cl_neg = '0;
      cl_act = (k < inst.m);
      if (k < inst.m)
        for (int l = 0; l < 3; l++)
          if (inst.cn[3*k+l]) cl_neg[inst.cv[3*k+l]] = 1'b1; else cl_pos[inst.cv[3*k+l]] = 1'b1;
    end
    @(negedge clk);
    cl_we = 0;
  endtask

  // One run; every step is checked against the reference energy model.
  task automatic run(input int exp_max, input bit expect_solve);
    bit x[], y[];
    int cyc = 0, cnt = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done && cyc < exp_max + 10 && failures < 100) begin
      int de [];
      int off_now, amp_now, nmax, lo, hi, must, flipped, nflip, e0;
      bit stepping, predicted_none;
      to_bits(state, x);
      e0 = inst.energy(x);
      chk(int'(n_unsat) == e0, $sformatf("SAT checker count %0d vs %0d", n_unsat, e0));
      de = new[NV];
      off_now = int'(offset);
      amp_now = int'(amp);
      nmax = (amp_now == 0) ? 0 : amp_now - 1;   // |noise| <= amp-1
      must = 0;
      for (int i = 0; i < NV; i++) begin
        de[i] = inst.delta_e(x, i);
        if (de[i] + nmax - off_now < 0) must = 1;  // some flip is certain
      end
      stepping = busy && !(e0 == 0) && (steps != max_steps);
      if ($countones(dut.tile_cand) > 1) n_contention++;
      @(posedge clk); #1;
      to_bits(state, y);
      nflip = 0; flipped = -1;
      for (int i = 0; i < NV; i++) if (x[i] != y[i]) begin nflip++; flipped = i; end
      if (stepping) begin
        cnt++;
        chk(nflip <= 1, "at most one flip per step");
        if (must) chk(nflip == 1, "a certain flip was taken");
        if (nflip == 1) begin
          n_flip++;
          chk(de[flipped] - nmax - off_now < 0, $sformatf("flip of %0d allowed (dE=%0d off=%0d amp=%0d)", flipped, de[flipped], off_now, amp_now));
          chk(offset == 0, "offset cleared after flip");
          if (de[flipped] < 0) n_downhill++; else n_uphill_or_zero++;
          if (off_now > 0) n_offset_flip++;
          if (flipped >= (NT-1)*NC) n_last_tile++;
        end else begin
          n_idle++;
          chk(int'(offset) == ((off_now + int'(e_offset) > 4095) ? 4095 : off_now + int'(e_offset)), "offset accumulates");
        end
        if (int'(amp) != amp_now) n_anneal++;
        chk(int'(steps) == cnt, "one step per cycle");
      end else begin
        chk(nflip == 0, "no flip when not stepping");
      end
      @(negedge clk);
      cyc++;
    end
    chk(done, "run finished");
    to_bits(state, x);
    if (expect_solve) begin
      chk(solved, "solved");
      chk(inst.energy(x) == 0, "final state satisfies every clause");
      n_sat_stop++;
    end else begin
      chk(!solved && int'(steps) == exp_max, "stopped at max_steps");
      chk(cyc == exp_max + 1, "step limit timing");
      n_max_stop++;
    end
    $display("run: steps=%0d solved=%0d energy=%0d", steps, solved, inst.energy(x));
  endtask

  initial begin
    bit ok = 0;
    inst = new(NV, MCL);
    for (int tries = 0; tries < 50 && !ok; tries++) begin
      inst.generate_planted();
      ok = inst.map_tiles(NC, NWL, NT, (1 << WB) - 1);
    end
    chk(ok, "instance fits the tiles");
    $display("instance: %0d variables, %0d clauses, max rows per tile %0d of %0d", NV, MCL, inst.max_rows(), NWL);
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_all();
    // Run 1: from a random state, with annealing noise, until solved.
    for (int i = 0; i < NV; i++) init_state[i] = 1'($urandom);
    amp0 = AMP0; anneal_period = APER; e_offset = 8'd1; max_steps = MAXS;
    run(MAXS, 1);
    // Run 2: a short run that hits the step limit.
    for (int i = 0; i < NV; i++) init_state[i] = 1'($urandom);
    amp0 = 8'd0; max_steps = 32'd4;
    run(4, 0);
    $display("mechanisms: flips=%0d downhill=%0d zero/uphill=%0d idle(offset)=%0d offset-induced=%0d anneal=%0d contention=%0d last-tile=%0d sat-stop=%0d max-stop=%0d",
             n_flip, n_downhill, n_uphill_or_zero, n_idle, n_offset_flip, n_anneal, n_contention, n_last_tile, n_sat_stop, n_max_stop);
    chk(n_flip > 0, "flip happened");
    chk(n_downhill > 0, "downhill flip happened");
    chk(n_uphill_or_zero > 0, "zero/uphill flip happened");
    chk(n_idle > 0, "offset accumulation happened");
    chk(n_offset_flip > 0, "offset-induced flip happened");
    chk(n_anneal > 0, "annealing step happened");
    chk(n_contention > 0, "several tiles proposed at once");
    chk(n_last_tile > 0, "last tile flipped a variable");
    chk(n_sat_stop > 0 && n_max_stop > 0, "both stop conditions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
