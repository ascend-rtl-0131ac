// tb_sc_rescale -- exhaustive check of the selective-interconnect rescaler for
// every input count: sub-sampling by 4 (default), by 32 from 1024 bits (BSN1
// output), by 8 from 128 bits, ratios 1/3 and 4/3 (the softmax defaults) and
// a centred window (saturation). Reference: clip(round(v*UP/DOWN)).
module tb_sc_rescale;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [31:0]   d0;  logic [7:0]  q0;
  logic [1023:0] d1;  logic [31:0] q1;
  logic [127:0]  d2;  logic [15:0] q2;
  logic [15:0]   d3;  logic [5:0]  q3;
  logic [15:0]   d4;  logic [21:0] q4;
  logic [35:0]   d5;  logic [7:0]  q5;

  sc_rescale                                           dut0 (.d(d0), .q(q0));
  sc_rescale #(.L_IN(1024), .L_OUT(32), .UP(1), .DOWN(32)) dut1 (.d(d1), .q(q1));
  sc_rescale #(.L_IN(128), .L_OUT(16), .UP(1), .DOWN(8))   dut2 (.d(d2), .q(q2));
  sc_rescale #(.L_IN(16),  .L_OUT(6),  .UP(1), .DOWN(3))   dut3 (.d(d3), .q(q3));
  sc_rescale #(.L_IN(16),  .L_OUT(22), .UP(4), .DOWN(3))   dut4 (.d(d4), .q(q4));
  sc_rescale #(.L_IN(36),  .L_OUT(8),  .UP(1), .DOWN(1))   dut5 (.d(d5), .q(q5));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int ref_count(input int n, input int li, input int lo,
                                   input int up, input int dn);
    return clip(rnd((n - li / 2) * up, dn), lo / 2) + lo / 2;
  endfunction

  initial begin
    for (int n = 0; n <= 1024; n++) begin
      d0 = 32'(thermo(n % 33, 32));
      d1 = 1024'(thermo(n, 1024));
      d2 = 128'(thermo(n % 129, 128));
      d3 = 16'(thermo(n % 17, 16));
      d4 = 16'(thermo(n % 17, 16));
      d5 = 36'(thermo(n % 37, 36));
      #1;
      check(thermo_count(4096'(q1), 32), ref_count(n, 1024, 32, 1, 32), "1024/32");
      if (n <= 32)  check(thermo_count(4096'(q0), 8),  ref_count(n, 32, 8, 1, 4),    "32/4");
      if (n <= 128) check(thermo_count(4096'(q2), 16), ref_count(n, 128, 16, 1, 8),  "128/8");
      if (n <= 16)  check(thermo_count(4096'(q3), 6),  ref_count(n, 16, 6, 1, 3),    "x1/3");
      if (n <= 16)  check(thermo_count(4096'(q4), 22), ref_count(n, 16, 22, 4, 3),   "x4/3");
      if (n <= 36)  check(thermo_count(4096'(q5), 8),  ref_count(n, 36, 8, 1, 1),    "window");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
