// Testbench for prng_xorshift32: checks the reset value, Marsaglia's published
// first output for seed 2463534242, that en=0 holds the word, and 1000 steps
// against an independent shift-register formulation.
module tb_prng_xorshift32;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  prng_xorshift32 #(.SEED(32'd2463534242)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Independent model: xorshift as three explicit bit-level passes.
  function automatic logic [31:0] ref_step(input logic [31:0] x);
    logic [31:0] a, b, c;
    for (int i = 0; i < 32; i++) a[i] = x[i] ^ ((i >= 13) ? x[i-13] : 1'b0);
    for (int i = 0; i < 32; i++) b[i] = a[i] ^ ((i + 17 < 32) ? a[i+17] : 1'b0);
    for (int i = 0; i < 32; i++) c[i] = b[i] ^ ((i >= 5) ? b[i-5] : 1'b0);
    return c;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    chk(rnd == 32'd2463534242, "reset value");
    en = 1;
    @(negedge clk);
    chk(rnd == 32'd723471715, "Marsaglia first output");
    en = 0;
    repeat (3) @(negedge clk);
    chk(rnd == 32'd723471715, "hold with en=0");
    exp = rnd;
    for (int k = 0; k < 1000; k++) begin
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) exp = ref_step(exp);
      chk(rnd == exp, $sformatf("step %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
