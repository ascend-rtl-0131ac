// softmax_block -- one iteration of the iterative approximate softmax for a
// whole row of M elements.
//
// M softmax_unit instances each form z_i = x_i*y_i. The global bitonic
// sorting network BSN1 adds all M z streams (M*BZ bits), and its output is
// sub-sampled by S1 to give sum(z) on LSUM = M*BZ/S1 bits, which is broadcast
// back to every unit. Each unit then produces y_i of the next iteration.
// Chaining K of these blocks (see ascend_top) gives the softmax after K
// iterations. This is the structure of the ASCEND softmax block; the
// sub-sampling keeps every S1-th bit of the sorted sum (sc_rescale).
//
// Interface: purely combinational. x and y are arrays of thermometer streams.
// Defaults are the configuration the paper recommends for B_y, s1, s2, k
// ([8, 32, 8, 3]) with B_x = 4 and m = 64; the scaling factors are this
// design's choice (see softmax_unit).
module softmax_block
  import ascend_pkg::*;
#(
  parameter int unsigned BX     = 4,
  parameter int unsigned BY     = 8,
  parameter int unsigned M      = 64,
  parameter int unsigned S1     = 32,
  parameter int unsigned S2     = 8,
  parameter int unsigned K      = 3,
  parameter int unsigned AX_NUM = 1,
  parameter int unsigned AX_DEN = 1,
  parameter int unsigned AY_DEN = 64
) (
  input  logic [BX-1:0] x      [M],
  input  logic [BY-1:0] y_prev [M],
  output logic [BY-1:0] y_next [M]
);

  localparam int unsigned BZ   = BX * BY / 2;
  localparam int unsigned LZ   = M * BZ;
  localparam int unsigned LSUM = LZ / S1;

  // elaboration-time parameter check
  if ((LZ % S1) != 0 || (LSUM % 2) != 0) begin : g_param_check
    $error("softmax_block: M*BZ must be an even multiple of S1");
  end

  logic [LZ-1:0]   z_all;      // z_0 .. z_(M-1), concatenated
  logic [LZ-1:0]   z_sorted;
  logic [LSUM-1:0] sum_z;

  for (genvar i = 0; i < int'(M); i++) begin : g_unit
    softmax_unit #(
      .BX(BX), .BY(BY), .M(M), .S1(S1), .S2(S2), .K(K),
      .AX_NUM(AX_NUM), .AX_DEN(AX_DEN), .AY_DEN(AY_DEN)
    ) u_unit (
      .x      (x[i]),
      .y_prev (y_prev[i]),
      .sum_z  (sum_z),
      .z      (z_all[i*BZ +: BZ]),
      .y_next (y_next[i])
    );
  end

  // BSN1 and its output sub-sampled by S1
  sc_bsn #(.N(LZ)) u_bsn1 (.d(z_all), .q(z_sorted));
  sc_rescale #(.L_IN(LZ), .L_OUT(LSUM), .UP(1), .DOWN(S1)) u_sub1 (.d(z_sorted), .q(sum_z));

endmodule
