// tb_sc_bsn -- random check of the bitonic sorting network adder: the output
// must be a thermometer stream with as many ones as the input. Sizes: 16
// (power of two), 36 (the default BSN2 size of the softmax unit, padded) and
// 1024 (the default global BSN1); also the concatenation of thermometer
// streams, i.e. an addition.
module tb_sc_bsn;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [15:0]   d1, q1;
  logic [35:0]   d2, q2;
  logic [1023:0] d3, q3;

  sc_bsn #(.N(16))   dut1 (.d(d1), .q(q1));
  sc_bsn #(.N(36))   dut2 (.d(d2), .q(q2));
  sc_bsn #(.N(1024)) dut3 (.d(d3), .q(q3));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      d1 = 16'($urandom);
      d2 = {4'($urandom), $urandom};
      for (int w = 0; w < 32; w++) d3[w*32 +: 32] = $urandom & $urandom;
      #1;
      check(thermo_count(4096'(q1), 16),   $countones(d1), "N=16");
      check(thermo_count(4096'(q2), 36),   $countones(d2), "N=36");
      check(thermo_count(4096'(q3), 1024), $countones(d3), "N=1024");
    end
    // addition of three thermometer streams of 8, 6 and 22 bits
    for (int t = 0; t < 100; t++) begin
      int c1, c2, c3;
      c1 = $urandom_range(8); c2 = $urandom_range(6); c3 = $urandom_range(22);
      d2 = {8'(thermo(c1, 8)), 6'(thermo(c2, 6)), 22'(thermo(c3, 22))};
      #1;
      check(thermo_count(4096'(q2), 36) - 18, (c1 - 4) + (c2 - 3) + (c3 - 11), "sum");
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
