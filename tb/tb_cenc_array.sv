// Testbench for cenc_array: programs random patterns (including empty bias
// rows and full rows) into a small array, applies random and hand-made state
// vectors and compares every word line with an AND computed bit by bit.
module tb_cenc_array;
  localparam int N = 12, NWL = 16;
  logic clk = 0, prog_we = 0;
  logic [$clog2(NWL)-1:0] prog_row;
  logic [N-1:0] prog_mask, state;
  logic [NWL-1:0] wl;
  logic [N-1:0] pat [NWL];
  int checks = 0, failures = 0;

  cenc_array #(.N(N), .N_WL(NWL)) dut (.clk, .prog_we, .prog_row, .prog_mask, .state, .wl);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int r = 0; r < NWL; r++) begin
      bit e = 1;
      for (int i = 0; i < N; i++) if (pat[r][i] && !state[i]) e = 0;
      checks++;
      if (wl[r] !== e) begin failures++; $display("FAIL row %0d state %h", r, state); end
    end
  endtask

  initial begin
    for (int r = 0; r < NWL; r++) begin
      case (r)
        0: pat[r] = '0;
        1: pat[r] = '1;
        default: begin
          pat[r] = '0;
          repeat ($urandom_range(1, 3)) pat[r][$urandom_range(0, N-1)] = 1'b1;
        end
      endcase
      @(negedge clk);
      prog_we = 1; prog_row = r[$clog2(NWL)-1:0]; prog_mask = pat[r];
      @(negedge clk);
      prog_we = 0;
    end
    state = '0; #1 check_all();
    state = '1; #1 check_all();
    for (int k = 0; k < 500; k++) begin
      state = N'($urandom);
      #1 check_all();
    end
    // re-program one row and check it took effect
    @(negedge clk);
    pat[5] = 12'h003; prog_we = 1; prog_row = 5; prog_mask = pat[5];
    @(negedge clk);
    prog_we = 0;
    state = 12'h001; #1 check_all();
    state = 12'h003; #1 check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
