// sc_rescale -- re-scaling and sub-sampling of a thermometer stream by
// selective interconnect.
//
// Multiplies the value of an L_IN-bit thermometer stream by UP/DOWN, rounds
// half up, and writes it as an L_OUT-bit stream, clipping at the ends of the
// output range: out = clip(floor((n - L_IN/2)*UP/DOWN + 1/2), +-L_OUT/2).
// Seen from the scaling factors, the output factor is alpha_in*DOWN/UP.
// Special cases: UP=1, DOWN=s with L_OUT=L_IN/s is the sub-sampling by s of
// the ASCEND softmax (keep every s-th bit); UP=DOWN=1 with a shorter L_OUT is
// a centred window, i.e. saturation.
//
// Because the mapping is monotone, each output bit is one wire from an input
// bit (or a constant): output rank i takes input rank t_i-1, where t_i is the
// smallest input count that gives an output count of i+1. No gates at all.
//
// The paper uses re-scaling blocks from earlier thermometer-SC work to align
// scaling factors and gives only their purpose; the rational ratio, the
// rounding rule and the clipping are this design's choices.
//
// Interface: purely combinational; L_IN and L_OUT must be even.
module sc_rescale
  import ascend_pkg::*;
#(
  parameter int unsigned L_IN  = 32,
  parameter int unsigned L_OUT = 8,
  parameter int unsigned UP    = 1,
  parameter int unsigned DOWN  = 4
) (
  input  logic [L_IN-1:0]  d,
  output logic [L_OUT-1:0] q
);

  // elaboration-time parameter check
  if ((L_IN % 2) != 0 || (L_OUT % 2) != 0 || UP == 0 || DOWN == 0) begin : g_param_check
    $error("sc_rescale: bad parameters L_IN=%0d L_OUT=%0d UP=%0d DOWN=%0d",
             L_IN, L_OUT, UP, DOWN);
  end

  for (genvar i = 0; i < int'(L_OUT); i++) begin : g_out
    localparam int T = rescale_thr(int'(L_IN), int'(L_OUT), int'(UP), int'(DOWN), i);
    if (T == 0) begin : g_one
      assign q[int'(L_OUT) - 1 - i] = 1'b1;
    end else if (T > int'(L_IN)) begin : g_zero
      assign q[int'(L_OUT) - 1 - i] = 1'b0;
    end else begin : g_wire
      assign q[int'(L_OUT) - 1 - i] = d[int'(L_IN) - T];
    end
  end

endmodule
