// tb_softmax_unit -- exhaustive check of one softmax compute unit at its
// default sizes (B_x=4, B_y=8, sum(z) on 32 bits): every combination of
// input counts for x_i, y_i^(j-1) and sum(z). z_i must be x_i*y_i exactly and
// y_i^j must equal the value-level reference
//   y + round(z/3) + round(round(-y*sum/8) * 4/3), clipped to +-4.
// Counts how often the update is positive, negative and saturated.
module tb_softmax_unit;
  import tb_ref_pkg::*;

  localparam int BX = 4, BY = 8, M = 64, S1 = 32, S2 = 8, K = 3;
  localparam int AXN = 1, AXD = 1, AYD = 64;
  localparam int BZ = BX * BY / 2, LSUM = M * BZ / S1;

  int checks = 0, failures = 0;
  int n_up = 0, n_down = 0, n_sat = 0;

  logic [BX-1:0]   x;
  logic [BY-1:0]   y_prev, y_next;
  logic [LSUM-1:0] sum_z;
  logic [BZ-1:0]   z;

  softmax_unit dut (.x(x), .y_prev(y_prev), .sum_z(sum_z), .z(z), .y_next(y_next));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int nx = 0; nx <= BX; nx++)
      for (int ny = 0; ny <= BY; ny++)
        for (int ns = 0; ns <= LSUM; ns++) begin
          int vx, vy, vs, ey, raw;
          x = BX'(thermo(nx, BX)); y_prev = BY'(thermo(ny, BY));
          sum_z = LSUM'(thermo(ns, LSUM));
          #1;
          vx = nx - BX/2; vy = ny - BY/2; vs = ns - LSUM/2;
          ey  = unit_y(vx, vy, vs, BY, S1, S2, K, AXN, AXD, AYD);
          raw = unit_y_raw(vx, vy, vs, S1, S2, K, AXN, AXD, AYD);
          check(thermo_count(4096'(z), BZ) - BZ/2, unit_z(vx, vy),
                $sformatf("z nx=%0d ny=%0d", nx, ny));
          check(thermo_count(4096'(y_next), BY) - BY/2, ey,
                $sformatf("y nx=%0d ny=%0d ns=%0d", nx, ny, ns));
          if (ey > vy) n_up++;
          if (ey < vy) n_down++;
          if (raw != ey) n_sat++;
        end
    $display("updates: up=%0d down=%0d saturated=%0d", n_up, n_down, n_sat);
    checks++;
    if (n_up == 0 || n_down == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL a kind of update never happened");
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
