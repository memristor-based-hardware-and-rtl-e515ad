// Testbench for tia_comp: random currents, DAC codes and states, plus the
// boundary case dE + dac = 0 (must not flip); the flip decision is compared
// with dE + dac < 0 computed with integers.
module tb_tia_comp;
  import pubo_pkg::*;
  localparam int NC = 19, CW = 13;
  logic [NC-1:0][CW-1:0] i_pos, i_neg;
  dac_t [NC-1:0] dac;
  logic [NC-1:0] s, flip;
  int checks = 0, failures = 0;

  tia_comp #(.N_COL(NC), .CW(CW)) dut (.i_pos, .i_neg, .dac, .s, .flip);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3000; k++) begin
      for (int c = 0; c < NC; c++) begin
        i_pos[c] = (k % 2) ? CW'($urandom_range(0, 60)) : CW'($urandom_range(0, 6000));
        i_neg[c] = (k % 2) ? CW'($urandom_range(0, 60)) : CW'($urandom_range(0, 6000));
        s[c] = 1'($urandom);
        if (k % 5 == 0) begin
          // exact boundary: dac = -dE
          int g = int'(i_pos[c]) - int'(i_neg[c]);
          dac[c] = dac_t'(s[c] ? g : -g);
        end else begin
          dac[c] = dac_t'($urandom_range(0, 8000)) - dac_t'(4000);
        end
      end
      #1;
      for (int c = 0; c < NC; c++) begin
        int g, de;
        g = int'(i_pos[c]) - int'(i_neg[c]);
        de = s[c] ? -g : g;
        checks++;
        if (flip[c] !== ((de + int'(dac[c])) < 0)) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d g=%0d s=%0d dac=%0d flip=%0d", c, g, s[c], dac[c], flip[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
