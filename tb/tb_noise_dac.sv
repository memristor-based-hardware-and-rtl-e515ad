// Testbench for noise_dac: random PRNG words, amplitudes and offsets; each
// column's code is compared with a reference computed with integer arithmetic,
// and the noise is checked to stay inside (-amp, amp).
module tb_noise_dac;
  import pubo_pkg::*;
  localparam int NC = 19;
  logic [31:0] rnd;
  amp_t amp;
  offset_t offset;
  dac_t [NC-1:0] dac;
  int checks = 0, failures = 0;

  noise_dac #(.N_COL(NC)) dut (.rnd, .amp, .offset, .dac);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2000; k++) begin
      rnd = $urandom;
      amp = (k % 4 == 0) ? 8'd0 : 8'($urandom);
      offset = (k % 3 == 0) ? '0 : offset_t'($urandom);
      #1;
      for (int c = 0; c < NC; c++) begin
        int sh, r8, sg, mag, expv;
        sh = (5 * c) % 32;
        r8 = 0;
        for (int b = 0; b < 8; b++) r8 |= int'(rnd[(b + sh) % 32]) << b;
        sg = rnd[(8 + sh) % 32];
        mag = (r8 * int'(amp)) / 256;
        expv = (sg ? -mag : mag) - int'(offset);
        checks++;
        if (int'(dac[c]) != expv || mag >= int'(amp) + (amp == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d c=%0d dac=%0d exp=%0d", k, c, dac[c], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
