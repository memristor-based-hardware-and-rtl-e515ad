// Testbench for state_update_unit with N = 10 variables in 3 tiles of 4 (the
// last tile partly empty). The testbench plays the tiles: each cycle it raises
// random proposals whose partial states flip one valid variable. Checked each
// step: the new state is the old one with exactly one proposing tile's slice
// written back (or unchanged when nobody proposes); the offset is cleared on a
// flip and grows by e_offset, saturating, otherwise; the amplitude follows the
// annealing schedule; steps count; the run ends at max_steps (not solved) and
// when sat is raised (solved), one step per cycle.
module tb_state_update_unit;
  import pubo_pkg::*;
  localparam int N = 10, NC = 4, NT = 3;
  logic clk = 0, rst_n = 0, start = 0, sat = 0;
  logic [N-1:0] init_state, state;
  amp_t amp0, amp;
  logic [15:0] anneal_period;
  logic [7:0] e_offset;
  logic [31:0] max_steps, steps;
  logic [NT-1:0] tile_cand;
  logic [NT-1:0][NC-1:0] tile_pstate;
  offset_t offset;
  logic step_en, busy, done, solved, flip;
  logic [1:0] flip_tile;
  int checks = 0, failures = 0;
  int n_flip = 0, n_idle = 0, n_sat_stop = 0, n_max_stop = 0, n_sat_offset = 0, n_anneal = 0;

  state_update_unit #(.N(N), .N_COL(NC), .N_TILE(NT)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive random tile proposals at every negedge.
  task automatic propose(input int p_none);
    logic [NT*NC-1:0] pad;
    pad = (NT*NC)'(state);
    tile_cand = '0;
    for (int t = 0; t < NT; t++) begin
      int nv = (N - t*NC < NC) ? N - t*NC : NC;
      tile_pstate[t] = pad[t*NC +: NC];
      if ($urandom_range(0, 99) >= p_none) begin
        tile_cand[t] = 1'b1;
        tile_pstate[t][$urandom_range(0, nv-1)] ^= 1'b1;
      end
    end
  endtask

  task automatic run(input int p_none, input int sat_at, input int exp_steps, input bit exp_solved);
    int cyc = 0, cnt = 0;
    offset_t off_prev;
    amp_t amp_prev;
    logic [N-1:0] st_prev;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    chk(busy && state == init_state && offset == 0 && amp == amp0 && steps == 0, "start loads");
    while (!done && cyc < 5000) begin
      sat = (sat_at >= 0 && int'(steps) >= sat_at);
      propose(p_none);
      #1;
      off_prev = offset; amp_prev = amp; st_prev = state;
      begin
        bit stepping = step_en;
        logic [NT*NC-1:0] pad;
        bit any = |tile_cand;
        @(posedge clk); #1;
        if (stepping) begin
          cnt++;
          if (any) begin
            bit match = 0;
            n_flip++;
            for (int t = 0; t < NT; t++) if (tile_cand[t]) begin
              pad = (NT*NC)'(st_prev);
              pad[t*NC +: NC] = tile_pstate[t];
              if (state == pad[N-1:0]) match = 1;
            end
            chk(match, "state = one proposing tile's partial state");
            chk(offset == 0, "offset cleared on flip");
          end else begin
            int e = int'(off_prev) + int'(e_offset);
            n_idle++;
            if (e > 4095) begin e = 4095; n_sat_offset++; end
            chk(state == st_prev, "no change without proposal");
            chk(int'(offset) == e, "offset accumulates");
          end
          chk(int'(steps) == cnt, "step count");
          chk(amp == amp_prev || (amp == amp_prev - 1 && (cnt % anneal_period) == 0), "anneal");
          if (amp != amp_prev) n_anneal++;
          if (cnt % anneal_period == 0 && amp_prev != 0) chk(amp == amp_prev - 1, "anneal step due");
        end else begin
          chk(state == st_prev, "no change when stopped");
        end
      end
      @(negedge clk);
      cyc++;
    end
    chk(done && !busy, "run ends");
    chk(int'(steps) == exp_steps, $sformatf("steps %0d exp %0d", steps, exp_steps));
    chk(solved == exp_solved, "solved flag");
    chk(cyc == exp_steps + 1, $sformatf("one step per cycle (%0d cycles)", cyc));
    if (exp_solved) n_sat_stop++; else n_max_stop++;
    sat = 0;
  endtask

  initial begin
    tile_cand = '0; tile_pstate = '0;
    init_state = 10'h2A5; amp0 = 8'd5; anneal_period = 16'd3; e_offset = 8'd7; max_steps = 32'd60;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(40, -1, 60, 0);
    init_state = 10'h0F0; max_steps = 32'd1000;
    run(30, 25, 25, 1);
    // long idle stretch: offset saturates
    e_offset = 8'd255; max_steps = 32'd40; amp0 = 8'd0;
    run(100, -1, 40, 0);
    chk(n_flip > 0 && n_idle > 0 && n_sat_offset > 0 && n_anneal > 0 && n_sat_stop > 0 && n_max_stop > 0,
        "all mechanisms exercised");
    $display("flips=%0d idle=%0d offset_sat=%0d anneal=%0d", n_flip, n_idle, n_sat_offset, n_anneal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
