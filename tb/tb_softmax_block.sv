// tb_softmax_block -- one softmax iteration over a 64-element row (default
// sizes). Random rows of x and y^(j-1) are applied; the reference sums
// z_i = x_i*y_i over the row, sub-samples the sum by 32 (round half up) and
// applies the unit update to every element. Also runs three chained
// iterations from the uniform start y0 = 1/64 and reports the mean absolute
// error against an exact softmax of the same inputs (information only).
module tb_softmax_block;
  import tb_ref_pkg::*;

  localparam int BX = 4, BY = 8, M = 64, S1 = 32, S2 = 8, K = 3;
  localparam int AXN = 1, AXD = 1, AYD = 64;

  int checks = 0, failures = 0;

  logic [BX-1:0] x      [M];
  logic [BY-1:0] y_prev [M];
  logic [BY-1:0] y_next [M];

  softmax_block dut (.x(x), .y_prev(y_prev), .y_next(y_next));

  int vx [M], vy [M];

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic apply_and_check(input string tag);
    int zsum, vs;
    for (int i = 0; i < M; i++) begin
      x[i]      = BX'(thermo(vx[i] + BX/2, BX));
      y_prev[i] = BY'(thermo(vy[i] + BY/2, BY));
    end
    #1;
    zsum = 0;
    for (int i = 0; i < M; i++) zsum += vx[i] * vy[i];
    vs = rnd(zsum, S1);
    for (int i = 0; i < M; i++)
      check(thermo_count(4096'(y_next[i]), BY) - BY/2,
            unit_y(vx[i], vy[i], vs, BY, S1, S2, K, AXN, AXD, AYD),
            $sformatf("%s element %0d", tag, i));
  endtask

  initial begin
    real mae, e, den;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < M; i++) begin
        vx[i] = $urandom_range(BX) - BX/2;
        vy[i] = $urandom_range(BY) - BY/2;
      end
      apply_and_check("random");
    end
    // three chained iterations from y0 = 1/64 (one unit of 1/64)
    mae = 0.0;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < M; i++) begin
        vx[i] = $urandom_range(BX) - BX/2;
        vy[i] = 1;
      end
      for (int j = 0; j < K; j++) begin
        apply_and_check("chain");
        for (int i = 0; i < M; i++) vy[i] = thermo_count(4096'(y_next[i]), BY) - BY/2;
      end
      den = 0.0;
      for (int i = 0; i < M; i++) den += $exp(real'(vx[i]));
      for (int i = 0; i < M; i++) begin
        e = real'(vy[i]) / 64.0 - $exp(real'(vx[i])) / den;
        mae += (e < 0.0) ? -e : e;
      end
    end
    $display("mean absolute error after %0d iterations: %f", K, mae / (20.0 * M));
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
