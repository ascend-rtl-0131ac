// tb_ascend_top -- end-to-end test of the nonlinear engine at its default
// sizes (64-element rows, 3 iterations, 64 GELU lanes).
//
// Softmax: rows of random attention scores are streamed, mostly back to
// back, with idle gaps and one mid-run reset. Every row leaving the engine is
// compared element by element with a value-level model of the three chained
// iterations started from y0 = 1/64, and must appear exactly K+1 = 4 cycles
// after it was accepted. GELU: random vectors are compared with the ternary
// table and must appear 2 cycles after they were accepted.
// Mechanisms counted (each must occur): back-to-back rows, idle gaps,
// elements whose y rose, fell and saturated in some iteration, a GELU output
// of each value -1 / 0 / +1 including the falling (non-monotonic) segment,
// and rows dropped by reset.
module tb_ascend_top;
  import tb_ref_pkg::*;

  localparam int BX = 4, BY = 8, M = 64, S1 = 32, S2 = 8, K = 3;
  localparam int AXN = 1, AXD = 1, AYD = 64;
  localparam int NG = 64, GI = 8, GO = 2;
  localparam int NROWS = 60;

  int checks = 0, failures = 0;
  int cyc = 0;

  logic clk = 0, rst_n = 0;
  logic              sm_in_valid = 0, sm_out_valid;
  logic [BX-1:0]     sm_x [M];
  logic [BY-1:0]     sm_y [M];
  logic              gelu_in_valid = 0, gelu_out_valid;
  logic [GI-1:0]     gelu_x [NG];
  logic [GO-1:0]     gelu_y [NG];

  ascend_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // expected results, queued at input time with the cycle they must appear
  typedef struct { int cycle; int y [M]; } sm_exp_t;
  typedef struct { int cycle; int y [NG]; } g_exp_t;
  sm_exp_t sm_q [$];
  g_exp_t  g_q  [$];

  int n_b2b = 0, n_gap = 0, n_up = 0, n_down = 0, n_sat = 0;
  int n_gm1 = 0, n_g0 = 0, n_gp1 = 0, n_gdip = 0, n_rst_drop = 0;
  int n_rows_out = 0, n_gelu_out = 0;
  real mae = 0.0;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // model of K iterations; also counts the kinds of update seen
  function automatic void model_row(input int vx [M], output int vy [M]);
    int zsum, vs, raw;
    int nv [M];
    for (int i = 0; i < M; i++) vy[i] = (2 * AYD + M) / (2 * M);
    for (int j = 0; j < K; j++) begin
      zsum = 0;
      for (int i = 0; i < M; i++) zsum += vx[i] * vy[i];
      vs = rnd(zsum, S1);
      for (int i = 0; i < M; i++) begin
        nv[i] = unit_y(vx[i], vy[i], vs, BY, S1, S2, K, AXN, AXD, AYD);
        raw   = unit_y_raw(vx[i], vy[i], vs, S1, S2, K, AXN, AXD, AYD);
        if (nv[i] > vy[i]) n_up++;
        if (nv[i] < vy[i]) n_down++;
        if (raw != nv[i])  n_sat++;
      end
      vy = nv;
    end
  endfunction

  // output monitor
  always @(posedge clk) begin
    #1;
    if (sm_out_valid) begin
      if (sm_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected softmax output at cycle %0d", cyc);
      end else begin
        sm_exp_t e;
        e = sm_q.pop_front();
        check(cyc, e.cycle, "softmax latency");
        for (int i = 0; i < M; i++)
          check(thermo_count(4096'(sm_y[i]), BY) - BY/2, e.y[i], $sformatf("y[%0d]", i));
        n_rows_out++;
      end
    end
    if (gelu_out_valid) begin
      if (g_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected GELU output at cycle %0d", cyc);
      end else begin
        g_exp_t e;
        e = g_q.pop_front();
        check(cyc, e.cycle, "gelu latency");
        for (int i = 0; i < NG; i++)
          check(thermo_count(4096'(gelu_y[i]), GO) - GO/2, e.y[i], $sformatf("gelu[%0d]", i));
        n_gelu_out++;
      end
    end
  end

  int gelu_tab [9] = '{0, -1, -1, -1, 0, 1, 1, 1, 1};

  task automatic send_row(input bit with_gelu);
    int vx [M];
    sm_exp_t e;
    g_exp_t  g;
    real den, err;
    for (int i = 0; i < M; i++) begin
      vx[i]   = $urandom_range(BX) - BX/2;
      sm_x[i] = BX'(thermo(vx[i] + BX/2, BX));
    end
    model_row(vx, e.y);
    den = 0.0;
    for (int i = 0; i < M; i++) den += $exp(real'(vx[i]));
    for (int i = 0; i < M; i++) begin
      err = real'(e.y[i]) / real'(AYD) - $exp(real'(vx[i])) / den;
      mae += (err < 0.0) ? -err : err;
    end
    sm_in_valid = 1;
    gelu_in_valid = with_gelu;
    if (with_gelu)
      for (int i = 0; i < NG; i++) begin
        int n;
        n = $urandom_range(GI);
        gelu_x[i] = GI'(thermo(n, GI));
        g.y[i] = gelu_tab[n];
        if (g.y[i] == -1) n_gm1++;
        if (g.y[i] == 0)  n_g0++;
        if (g.y[i] == 1)  n_gp1++;
        if (n >= 1 && n <= 3) n_gdip++;
      end
    @(posedge clk);
    e.cycle = cyc + K + 1;
    g.cycle = cyc + 2;
    sm_q.push_back(e);
    if (with_gelu) g_q.push_back(g);
    #1;
    sm_in_valid = 0;
    gelu_in_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < M; i++)  sm_x[i] = '0;
    for (int i = 0; i < NG; i++) gelu_x[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < NROWS; r++) begin
      bit gap;
      gap = ($urandom_range(3) == 0);
      if (gap) begin
        n_gap++;
        repeat ($urandom_range(3) + 1) @(posedge clk);
        #1;
      end else if (r > 0) n_b2b++;
      send_row(r % 2 == 0);
    end
    repeat (K + 3) @(posedge clk);
    // reset while rows are in flight: they must be dropped
    send_row(0);
    send_row(0);
    #1 rst_n = 0;
    n_rst_drop = sm_q.size();
    sm_q.delete();
    g_q.delete();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    send_row(1);
    repeat (K + 3) @(posedge clk);

    check(sm_q.size(), 0, "softmax rows still pending");
    check(g_q.size(), 0, "GELU vectors still pending");
    check(n_rows_out, NROWS + 1, "softmax rows out");
    $display("rows out %0d, GELU vectors out %0d", n_rows_out, n_gelu_out);
    $display("mechanisms: back-to-back=%0d gaps=%0d y-up=%0d y-down=%0d y-saturated=%0d",
             n_b2b, n_gap, n_up, n_down, n_sat);
    $display("            gelu -1=%0d 0=%0d +1=%0d falling-segment=%0d reset-dropped=%0d",
             n_gm1, n_g0, n_gp1, n_gdip, n_rst_drop);
    $display("softmax mean absolute error vs exact: %f", mae / real'((NROWS + 3) * M));
    if (n_b2b == 0 || n_gap == 0 || n_up == 0 || n_down == 0 || n_sat == 0 ||
        n_gm1 == 0 || n_g0 == 0 || n_gp1 == 0 || n_gdip == 0 || n_rst_drop == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
