// Testbench for sat_checker: random 3-literal clauses over 10 variables, some
// slots inactive; for every one of the 1024 assignments the number of
// unsatisfied clauses and the sat flag are compared with a direct evaluation.
module tb_sat_checker;
  localparam int N = 10, M = 20;
  logic clk = 0, prog_we = 0, prog_act;
  logic [$clog2(M)-1:0] prog_idx;
  logic [N-1:0] prog_pos, prog_neg, state;
  logic sat;
  logic [$clog2(M+1)-1:0] n_unsat;
  int v [M][3];
  bit ng [M][3];
  bit act [M];
  int checks = 0, failures = 0, n_sat_seen = 0;

  sat_checker #(.N(N), .M(M)) dut (.clk, .prog_we, .prog_idx, .prog_pos, .prog_neg, .prog_act,
                                   .state, .sat, .n_unsat);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < M; m++) begin
      act[m] = (m < 16);
      prog_pos = '0; prog_neg = '0;
      for (int l = 0; l < 3; l++) begin
        v[m][l] = $urandom_range(0, N-1);
        ng[m][l] = 1'($urandom);
        if (ng[m][l]) prog_neg[v[m][l]] = 1'b1; else prog_pos[v[m][l]] = 1'b1;
      end
      @(negedge clk);
      prog_we = 1; prog_idx = m[$clog2(M)-1:0]; prog_act = act[m];
      @(negedge clk);
      prog_we = 0;
    end
    for (int a = 0; a < (1 << N); a++) begin
      automatic int cnt = 0;
      state = N'(a);
      #1;
      for (int m = 0; m < M; m++) begin
        automatic bit ok = 0;
        for (int l = 0; l < 3; l++) ok |= ng[m][l] ? !state[v[m][l]] : state[v[m][l]];
        if (act[m] && !ok) cnt++;
      end
      if (cnt == 0) n_sat_seen++;
      checks += 2;
      if (int'(n_unsat) != cnt) begin failures++; $display("FAIL a=%0d %0d/%0d", a, n_unsat, cnt); end
      if (sat != (cnt == 0)) failures++;
    end
    checks++;
    if (n_sat_seen == 0) begin failures++; $display("FAIL no satisfying assignment exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
