// tb_sc_mul -- exhaustive check of the thermometer multiplier at the sizes of
// the softmax unit (4x8 bits for MUL1, 8x32 bits for MUL2): every pair of
// input counts, checking the product count and the thermometer form.
// Unsorted input patterns are also applied, since the multiplier counts ones.
module tb_sc_mul;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [3:0]   a1;  logic [7:0]  b1;  logic [15:0]  z1;
  logic [7:0]   a2;  logic [31:0] b2;  logic [127:0] z2;

  sc_mul #(.LA(4), .LB(8))  dut1 (.a(a1), .b(b1), .z(z1));
  sc_mul #(.LA(8), .LB(32)) dut2 (.a(a2), .b(b2), .z(z2));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int na = 0; na <= 4; na++)
      for (int nb = 0; nb <= 8; nb++) begin
        a1 = 4'(thermo(na, 4)); b1 = 8'(thermo(nb, 8)); #1;
        check(thermo_count(4096'(z1), 16), (na - 2) * (nb - 4) + 8,
              $sformatf("4x8 na=%0d nb=%0d", na, nb));
      end
    for (int na = 0; na <= 8; na++)
      for (int nb = 0; nb <= 32; nb++) begin
        a2 = 8'(thermo(na, 8)); b2 = 32'(thermo(nb, 32)); #1;
        check(thermo_count(4096'(z2), 128), (na - 4) * (nb - 16) + 64,
              $sformatf("8x32 na=%0d nb=%0d", na, nb));
      end
    for (int t = 0; t < 200; t++) begin
      a1 = 4'($urandom); b1 = 8'($urandom); #1;
      check(thermo_count(4096'(z1), 16),
            ($countones(a1) - 2) * ($countones(b1) - 4) + 8, "unsorted 4x8");
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
