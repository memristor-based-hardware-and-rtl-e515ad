// Testbench for select_1_of_n: for n = 19 and n = 8 it checks that exactly
// one raised request is granted, that it is the first raised request at or
// after (rnd*n)>>16, that idx matches the grant, and that no request gives no
// grant. It also checks that every request line gets granted at some point.
module tb_select_1_of_n;
  localparam int NA = 19, NB = 8;
  logic [NA-1:0] req_a, gnt_a;
  logic [NB-1:0] req_b, gnt_b;
  logic [4:0] idx_a;
  logic [2:0] idx_b;
  logic [15:0] rnd;
  logic val_a, val_b;
  int checks = 0, failures = 0;
  int hits_a [NA];

  select_1_of_n #(.NREQ(NA)) dut_a (.req(req_a), .rnd, .gnt(gnt_a), .idx(idx_a), .valid(val_a));
  select_1_of_n #(.NREQ(NB)) dut_b (.req(req_b), .rnd, .gnt(gnt_b), .idx(idx_b), .valid(val_b));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected(input logic [31:0] req, input int n, input logic [15:0] r);
    int st = (int'(r) * n) >>> 16;
    for (int k = 0; k < n; k++) if (req[(st + k) % n]) return (st + k) % n;
    return -1;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int k = 0; k < 4000; k++) begin
      int ea, eb;
      rnd = 16'($urandom);
      req_a = (k % 10 == 0) ? '0 : (k % 3 == 0) ? NA'(1) << $urandom_range(0, NA-1) : NA'($urandom);
      req_b = (k % 10 == 1) ? '0 : NB'($urandom);
      #1;
      ea = expected(32'(req_a), NA, rnd);
      eb = expected(32'(req_b), NB, rnd);
      chk(val_a == (ea >= 0) && val_b == (eb >= 0), "valid");
      if (ea >= 0) begin
        chk(gnt_a == (NA'(1) << ea) && int'(idx_a) == ea, $sformatf("grant a exp %0d got %h", ea, gnt_a));
        hits_a[ea]++;
      end else chk(gnt_a == '0, "no grant a");
      if (eb >= 0) chk(gnt_b == (NB'(1) << eb) && int'(idx_b) == eb, "grant b");
      else chk(gnt_b == '0, "no grant b");
    end
    for (int i = 0; i < NA; i++) chk(hits_a[i] > 0, $sformatf("line %0d never granted", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
