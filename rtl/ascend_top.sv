// ascend_top -- nonlinear-function engine of an end-to-end SC ViT
// accelerator: iterative approximate softmax and gate-assisted SI GELU.
//
// Softmax path: an attention row of M scores x_i (BX-bit thermometer
// streams) enters on sm_in_valid. The uniform start vector y0 = 1/M is a
// constant stream (Y0_COUNT ones, value 1/M on y's grid rounded half up). K
// softmax_block instances, one per iteration, are chained so that the
// engine is fully parallel (K blocks per accelerator, as the paper sizes it).
// A register bank follows the input and each block: the row appears on sm_y
// K+1 cycles after it was accepted, and a new row can enter every cycle.
// x travels with y through the pipeline because every iteration needs it.
//
// GELU path: N_GELU gate-assisted SI blocks, one per element of the MLP
// hidden vector slice presented on gelu_x; input and output are registered,
// so results appear two cycles after gelu_in_valid.
//
// The linear layers (Q/K/V, attention products, MLP weights), normalization,
// residual additions and all storage are not part of this engine: the
// softmax and GELU inputs and outputs are its ports, which is where those
// parts connect. The pipeline registers, the valid signals, the reset
// (active-low, synchronous, clearing the valid bits only) and N_GELU are
// this design's choices; the softmax defaults [B_y, s1, s2, k] = [8, 32, 8, 3],
// B_x = 4, m = 64 and the GELU wiring come from the paper.
module ascend_top
  import ascend_pkg::*;
#(
  parameter int unsigned M         = 64,
  parameter int unsigned K         = 3,
  parameter int unsigned BX        = 4,
  parameter int unsigned BY        = 8,
  parameter int unsigned S1        = 32,
  parameter int unsigned S2        = 8,
  parameter int unsigned AX_NUM    = 1,
  parameter int unsigned AX_DEN    = 1,
  parameter int unsigned AY_DEN    = 64,
  parameter int unsigned N_GELU    = 64,
  parameter int unsigned G_IN      = 8,
  parameter int unsigned G_OUT     = 2,
  parameter real         G_ALPHA_IN  = 0.35,
  parameter real         G_ALPHA_OUT = 0.24
) (
  input  logic              clk,
  input  logic              rst_n,
  // softmax: one attention row per valid cycle
  input  logic              sm_in_valid,
  input  logic [BX-1:0]     sm_x [M],
  output logic              sm_out_valid,
  output logic [BY-1:0]     sm_y [M],
  // GELU: N_GELU elements per valid cycle
  input  logic              gelu_in_valid,
  input  logic [G_IN-1:0]   gelu_x [N_GELU],
  output logic              gelu_out_valid,
  output logic [G_OUT-1:0]  gelu_y [N_GELU]
);

  // y0 = 1/M on the grid 1/AY_DEN, rounded half up
  localparam int unsigned Y0_COUNT = BY / 2 + (2 * AY_DEN + M) / (2 * M);

  // ---------------------------------------------------------------- softmax
  logic              v_q [K+1];
  logic [BX-1:0]     x_q [K+1][M];
  logic [BY-1:0]     y_q [K+1][M];
  logic [BY-1:0]     y_d [K][M];

  always_ff @(posedge clk) begin
    if (!rst_n) v_q[0] <= 1'b0;
    else        v_q[0] <= sm_in_valid;
    if (sm_in_valid) begin
      x_q[0] <= sm_x;
      for (int i = 0; i < int'(M); i++)
        y_q[0][i] <= BY'({Y0_COUNT{1'b1}}) << (BY - Y0_COUNT);
    end
  end

  for (genvar j = 0; j < int'(K); j++) begin : g_iter
    softmax_block #(
      .BX(BX), .BY(BY), .M(M), .S1(S1), .S2(S2), .K(K),
      .AX_NUM(AX_NUM), .AX_DEN(AX_DEN), .AY_DEN(AY_DEN)
    ) u_block (
      .x      (x_q[j]),
      .y_prev (y_q[j]),
      .y_next (y_d[j])
    );

    always_ff @(posedge clk) begin
      if (!rst_n) v_q[j+1] <= 1'b0;
      else        v_q[j+1] <= v_q[j];
      if (v_q[j]) begin
        x_q[j+1] <= x_q[j];
        y_q[j+1] <= y_d[j];
      end
    end
  end

  assign sm_out_valid = v_q[K];
  assign sm_y         = y_q[K];

  // ------------------------------------------------------------------- GELU
  logic              gv_q, gv_q2;
  logic [G_IN-1:0]   gx_q [N_GELU];
  logic [G_OUT-1:0]  gy_d [N_GELU];
  logic [G_OUT-1:0]  gy_q [N_GELU];

  for (genvar g = 0; g < int'(N_GELU); g++) begin : g_gelu
    gelu_si #(
      .L_IN(G_IN), .L_OUT(G_OUT), .ALPHA_IN(G_ALPHA_IN), .ALPHA_OUT(G_ALPHA_OUT)
    ) u_gelu (
      .x (gx_q[g]),
      .y (gy_d[g])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gv_q  <= 1'b0;
      gv_q2 <= 1'b0;
    end else begin
      gv_q  <= gelu_in_valid;
      gv_q2 <= gv_q;
    end
    if (gelu_in_valid) gx_q <= gelu_x;
    if (gv_q)          gy_q <= gy_d;
  end

  assign gelu_out_valid = gv_q2;
  assign gelu_y         = gy_q;

  // Inputs must be thermometer streams (ones packed at the top).
  function automatic bit is_thermo_x(input logic [BX-1:0] v);
    int c;
    c = $countones(v);
    return v == (BX'({BX{1'b1}}) << (BX - c));
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n && sm_in_valid)
      for (int i = 0; i < int'(M); i++)
        assert (is_thermo_x(sm_x[i]))
          else $error("ascend_top: sm_x[%0d] is not a thermometer stream", i);
  end

endmodule
