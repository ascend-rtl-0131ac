// softmax_unit -- one element of one iteration of the iterative approximate
// softmax.
//
// The softmax of an m-vector x is reached from the uniform vector y0 = 1/m by
// k Euler steps of y(t) = softmax(t*x), whose derivative needs only y itself:
//     z_i  = x_i * y_i
//     y_i' = y_i + [z_i - y_i * sum(z)] / k
// This unit computes y_i' for one element i, given x_i, y_i and the row sum
// sum(z) (formed outside, by softmax_block). Its datapath follows the ASCEND
// softmax unit:
//   MUL1      z_i = x_i * y_i                          (sc_mul, BZ bits)
//   MUL2      y_i * sum(z), negated                    (sc_mul + bit reversal
//             and inversion: the L-bit stream with n ones becomes one with
//             L-n ones, i.e. the value changes sign)
//   sub-sample that product by S2                      (sc_rescale)
//   re-scale  z_i/k and -y_i*sum(z)/k to y's scale     (sc_rescale, two blocks)
//   BSN2      y_i + z_i/k - y_i*sum(z)/k               (sc_bsn)
//   window    the central BY bits of the BSN2 result   (sc_rescale, saturates)
// Dividing by k costs nothing: it is folded into the re-scaling ratio.
//
// Scaling factors (design-time bookkeeping only): x has AX_NUM/AX_DEN, y has
// 1/AY_DEN, sum(z) arrives sub-sampled by S1. The two re-scaling ratios
// follow from them: z/k needs AX_NUM/(AX_DEN*K), the product needs
// AX_NUM*S1*S2/(AX_DEN*AY_DEN*K). The y stream enters BSN2 unscaled, so only
// two re-scaling blocks are needed, as in the paper. Rounding (half up) at
// each re-scaling, saturation at the BSN2 output and the scale values are
// this design's choices.
//
// Interface: purely combinational. BX, BY and the derived lengths must be even.
module softmax_unit
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
  parameter int unsigned AY_DEN = 64,
  localparam int unsigned BZ    = BX * BY / 2,        // length of z_i
  localparam int unsigned LSUM  = M * BZ / S1         // length of sum(z)
) (
  input  logic [BX-1:0]   x,        // x_i
  input  logic [BY-1:0]   y_prev,   // y_i^(j-1)
  input  logic [LSUM-1:0] sum_z,    // sum over the row of z, sub-sampled by S1
  output logic [BZ-1:0]   z,        // z_i, to the global BSN
  output logic [BY-1:0]   y_next    // y_i^j
);

  localparam int unsigned LP   = BY * LSUM / 2;        // y * sum(z)
  localparam int unsigned LPS  = LP / S2;              // after sub-sampling
  localparam int unsigned UPZ  = AX_NUM;
  localparam int unsigned DNZ  = AX_DEN * K;
  localparam int unsigned UPP  = AX_NUM * S1 * S2;
  localparam int unsigned DNP  = AX_DEN * AY_DEN * K;
  localparam int unsigned LZK  = rescale_len(int'(BZ), int'(UPZ), int'(DNZ));
  localparam int unsigned LPK  = rescale_len(int'(LPS), int'(UPP), int'(DNP));
  localparam int unsigned L2   = BY + LZK + LPK;

  // elaboration-time parameter check
  if ((LP % S2) != 0 || (LPS % 2) != 0) begin : g_param_check
    $error("softmax_unit: BY*LSUM/2 must be an even multiple of S2");
  end

  // MUL1
  sc_mul #(.LA(BX), .LB(BY)) u_mul1 (.a(x), .b(y_prev), .z(z));

  // MUL2 and its inverted output
  logic [LP-1:0] p, p_neg;
  sc_mul #(.LA(BY), .LB(LSUM)) u_mul2 (.a(y_prev), .b(sum_z), .z(p));
  always_comb
    for (int b = 0; b < int'(LP); b++) p_neg[b] = ~p[int'(LP) - 1 - b];

  // output of MUL2 sub-sampled by S2
  logic [LPS-1:0] p_sub;
  sc_rescale #(.L_IN(LP), .L_OUT(LPS), .UP(1), .DOWN(S2)) u_sub2 (.d(p_neg), .q(p_sub));

  // the two re-scaling blocks: z/k and -y*sum(z)/k onto y's scaling factor
  logic [LZK-1:0] zk;
  logic [LPK-1:0] pk;
  sc_rescale #(.L_IN(BZ),  .L_OUT(LZK), .UP(UPZ), .DOWN(DNZ)) u_rsz (.d(z),     .q(zk));
  sc_rescale #(.L_IN(LPS), .L_OUT(LPK), .UP(UPP), .DOWN(DNP)) u_rsp (.d(p_sub), .q(pk));

  // BSN2: y + z/k - y*sum(z)/k
  logic [L2-1:0] acc;
  sc_bsn #(.N(L2)) u_bsn2 (.d({y_prev, zk, pk}), .q(acc));

  // keep the central BY bits (saturating to the range of y)
  sc_rescale #(.L_IN(L2), .L_OUT(BY), .UP(1), .DOWN(1)) u_win (.d(acc), .q(y_next));

endmodule
