// tb_softmax_configs -- the softmax configurations [B_y, s1, s2, k] compared
// at accelerator level, [4,128,2,2], [16,128,16,4] and [32,128,16,4]
// (B_x = 4, m = 64), each as one softmax_block with the same scaling choice
// as the default (alpha_x = 1, alpha_y = 1/64). Random rows are checked
// element by element against the value-level reference of one iteration.
// (The default [8,32,8,3] is covered by tb_softmax_block.)
module tb_softmax_configs;
  import tb_ref_pkg::*;

  localparam int BX = 4, M = 64;

  int checks = 0, failures = 0;

  logic [BX-1:0] x [M];
  logic [3:0]  ya [M], yan [M];
  logic [15:0] yb [M], ybn [M];
  logic [31:0] yc [M], ycn [M];

  softmax_block #(.BY(4),  .S1(128), .S2(2),  .K(2)) dut_a (.x(x), .y_prev(ya), .y_next(yan));
  softmax_block #(.BY(16), .S1(128), .S2(16), .K(4)) dut_b (.x(x), .y_prev(yb), .y_next(ybn));
  softmax_block #(.BY(32), .S1(128), .S2(16), .K(4)) dut_c (.x(x), .y_prev(yc), .y_next(ycn));

  int vx [M], va [M], vb [M], vc [M];

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sum_ref(input int vy [M], input int s1);
    int zs;
    zs = 0;
    for (int i = 0; i < M; i++) zs += vx[i] * vy[i];
    return rnd(zs, s1);
  endfunction

  initial begin
    for (int t = 0; t < 100; t++) begin
      int sa, sb, sc;
      for (int i = 0; i < M; i++) begin
        vx[i] = $urandom_range(BX) - BX/2;
        va[i] = $urandom_range(4) - 2;
        vb[i] = $urandom_range(16) - 8;
        vc[i] = $urandom_range(32) - 16;
        x[i]  = BX'(thermo(vx[i] + BX/2, BX));
        ya[i] = 4'(thermo(va[i] + 2, 4));
        yb[i] = 16'(thermo(vb[i] + 8, 16));
        yc[i] = 32'(thermo(vc[i] + 16, 32));
      end
      #1;
      sa = sum_ref(va, 128); sb = sum_ref(vb, 128); sc = sum_ref(vc, 128);
      for (int i = 0; i < M; i++) begin
        check(thermo_count(4096'(yan[i]), 4) - 2,
              unit_y(vx[i], va[i], sa, 4, 128, 2, 2, 1, 1, 64), "[4,128,2,2]");
        check(thermo_count(4096'(ybn[i]), 16) - 8,
              unit_y(vx[i], vb[i], sb, 16, 128, 16, 4, 1, 1, 64), "[16,128,16,4]");
        check(thermo_count(4096'(ycn[i]), 32) - 16,
              unit_y(vx[i], vc[i], sc, 32, 128, 16, 4, 1, 1, 64), "[32,128,16,4]");
      end
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
