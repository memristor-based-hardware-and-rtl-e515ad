// Testbench for gradient_array: random conductances in a small array (and one
// row at full scale), random word-line patterns; column currents are compared
// with sums computed in the testbench.
module tb_gradient_array;
  localparam int NC = 5, NWL = 12, WB = 4;
  localparam int CW = $clog2(NWL * 15 + 1);
  logic clk = 0, prog_we = 0;
  logic [$clog2(NWL)-1:0] prog_row;
  logic [NC-1:0][WB-1:0] prog_wpos, prog_wneg;
  logic [NWL-1:0] wl;
  logic [NC-1:0][CW-1:0] i_pos, i_neg;
  int gp [NWL][NC], gn [NWL][NC];
  int checks = 0, failures = 0;

  gradient_array #(.N_COL(NC), .N_WL(NWL), .WBITS(WB)) dut (
    .clk, .prog_we, .prog_row, .prog_wpos, .prog_wneg, .wl, .i_pos, .i_neg);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NWL; r++) begin
      for (int c = 0; c < NC; c++) begin
        gp[r][c] = (r == 0) ? 15 : $urandom_range(0, 15);
        gn[r][c] = (r == 0) ? 15 : $urandom_range(0, 15);
        prog_wpos[c] = gp[r][c][WB-1:0];
        prog_wneg[c] = gn[r][c][WB-1:0];
      end
      @(negedge clk);
      prog_we = 1; prog_row = r[$clog2(NWL)-1:0];
      @(negedge clk);
      prog_we = 0;
    end
    for (int k = 0; k < 600; k++) begin
      wl = (k == 0) ? '1 : (k == 1) ? '0 : NWL'($urandom);
      #1;
      for (int c = 0; c < NC; c++) begin
        automatic int sp = 0, sn = 0;
        for (int r = 0; r < NWL; r++) if (wl[r]) begin sp += gp[r][c]; sn += gn[r][c]; end
        checks += 2;
        if (int'(i_pos[c]) != sp) begin failures++; $display("FAIL pos c=%0d %0d/%0d", c, i_pos[c], sp); end
        if (int'(i_neg[c]) != sn) begin failures++; $display("FAIL neg c=%0d %0d/%0d", c, i_neg[c], sn); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
