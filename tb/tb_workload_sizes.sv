// Workload testbench: random satisfiable 3-SAT formulas at the problem sizes
// 20, 50, 100 and 150 variables, with 4.23 clauses per variable (the ratio of
// hard random 3-SAT), each programmed into the solver at its default size (150
// variables, 8 tiles of 19, 400 rows per tile, 645 clause slots) and solved
// from random states (up to four attempts of 25,000 steps, as a
// time-to-solution measurement restarts a stochastic solver). Smaller formulas use the first variables and tiles;
// the other rows and clause slots are programmed empty. Per size it checks
// that the formula fits, that the SAT checker's count matches the clause-level
// energy at every step, and that the run ends solved with every clause
// satisfied. It prints the steps taken per size.
module tb_workload_sizes;
  import pubo_pkg::*;
  import sat3_pkg::*;

  localparam int NV = 150, NC = 19, NWL = 400, NT = 8, WB = 4, MCAP = 645;
  localparam int TW = 3, UW = $clog2(MCAP + 1);

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

  pubo_solver_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic solve_size(input int n);
    Sat3Instance inst;
    bit ok = 0;
    bit x[];
    int m = (n * 423 + 50) / 100;
    int cyc = 0, total = 0, restarts = 0;
    bit got = 0;
    inst = new(n, m);
    for (int tries = 0; tries < 50 && !ok; tries++) begin
      inst.generate_planted();
      ok = inst.map_tiles(NC, NWL, NT, (1 << WB) - 1);
    end
    chk(ok, $sformatf("%0d-variable formula fits", n));
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
      cl_act = (k < m);
      if (k < m)
        for (int l = 0; l < 3; l++)
          if (inst.cn[3*k+l]) cl_neg[inst.cv[3*k+l]] = 1'b1; else cl_pos[inst.cv[3*k+l]] = 1'b1;
    end
    @(negedge clk);
    cl_we = 0;
    amp0 = 8'd2; anneal_period = 16'd0; e_offset = 8'd1; max_steps = 32'd25000;
    void'($value$plusargs("amp0=%d", amp0));
    void'($value$plusargs("aper=%d", anneal_period));
    void'($value$plusargs("eoff=%d", e_offset));
    // Up to four restarts from fresh random states, as a time-to-solution
    // measurement would do.
    for (int attempt = 0; attempt < 4 && !got; attempt++) begin
      init_state = '0;
      for (int i = 0; i < n; i++) init_state[i] = 1'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 26000) begin
        x = new[n];
        for (int i = 0; i < n; i++) x[i] = state[i];
        if (cyc % 16 == 0) chk(int'(n_unsat) == inst.energy(x), "SAT checker count");
        @(negedge clk);
        cyc++;
      end
      total += int'(steps);
      got = solved;
      restarts = attempt;
    end
    x = new[n];
    for (int i = 0; i < n; i++) x[i] = state[i];
    chk(done && solved, $sformatf("%0d-variable formula solved", n));
    chk(inst.energy(x) == 0, "every clause satisfied");
    $display("size %0d: %0d clauses, max rows per tile %0d, solved=%0d in %0d steps (%0d restarts)",
             n, m, inst.max_rows(), solved, total, restarts);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    solve_size(20);
    solve_size(50);
    solve_size(100);
    solve_size(150);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
