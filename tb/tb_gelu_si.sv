// tb_gelu_si -- checks the gate-assisted SI GELU.
// Default size (8-bit input, 2-bit output): for every input count the output
// must follow the ternary truth table s[2:0] = {x[7],x[4],x[3]} -> 000:10,
// 100:00, 110:10, 111:11, i.e. GELU values 0,-1,-1,-1,0,1,1,1,1 for inputs
// -4..4. A 32-bit-input, 8-bit-output instance (scales 0.1 and 0.04) is
// compared with a direct evaluation of rounded GELU.
module tb_gelu_si;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]  x1;  logic [1:0] y1;
  logic [31:0] x2;  logic [7:0] y2;

  gelu_si dut1 (.x(x1), .y(y1));
  gelu_si #(.L_IN(32), .L_OUT(8), .ALPHA_IN(0.1), .ALPHA_OUT(0.04)) dut2 (.x(x2), .y(y2));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int exp_val [9] = '{0, -1, -1, -1, 0, 1, 1, 1, 1};
  int dips;

  initial begin
    for (int n = 0; n <= 8; n++) begin
      x1 = 8'(thermo(n, 8)); #1;
      check(thermo_count(4096'(y1), 2) - 1, exp_val[n], $sformatf("ternary n=%0d", n));
      check(int'(y1), int'({~x1[7] | x1[4], x1[3]}), $sformatf("wiring n=%0d", n));
    end
    dips = 0;
    for (int n = 0; n <= 32; n++) begin
      int e;
      x2 = 32'(thermo(n, 32)); #1;
      e = clip(rnd(0, 1) + $rtoi($floor(gelu_ref(0.1 * real'(n - 16)) / 0.04 + 0.5)), 4) + 4;
      check(thermo_count(4096'(y2), 8), e, $sformatf("8b n=%0d", n));
      if (n > 0 && e < clip($rtoi($floor(gelu_ref(0.1 * real'(n - 17)) / 0.04 + 0.5)), 4) + 4)
        dips++;
    end
    // the non-monotonic (falling) part of GELU must be exercised
    checks++;
    if (dips == 0) begin
      failures++;
      $display("FAIL no falling segment seen");
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
