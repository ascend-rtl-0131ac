// gelu_si -- GELU by gate-assisted selective interconnect (SI).
//
// Input: an L_IN-bit thermometer stream x (value ALPHA_IN*(n - L_IN/2)).
// Output: an L_OUT-bit thermometer stream y whose value ALPHA_OUT*(c - L_OUT/2)
// is GELU of the input, rounded to the output grid and clipped.
//
// Plain SI can only wire selected input bits to the output, so it can only
// make monotone functions. GELU first falls and then rises. For such a
// function the inputs for which output bit "count >= i+1" must be 1 are a
// run at the low end plus a run at the high end: n < lo_i or n >= hi_i. The
// bit "n >= t" is one input wire, so each output bit is
//     y = !x(n >= lo_i)  OR  x(n >= hi_i),
// one inverter and one 2-input OR on two selected wires (either term drops
// out when it is constant). The whole block is one gate level deep.
//
// With the default L_IN=8, L_OUT=2 this is the ternary GELU drawn in the
// ASCEND paper: y[1] = !x[7] | x[4], y[0] = x[3], whose truth table over the
// selected bits s[2:0] = {x[7], x[4], x[3]} is 000->10, 100->00, 110->10,
// 111->11 (output values 0, -1, 0, 1). The paper's text writes the y[1] gate
// as an AND; its own table requires the OR used here. The selected positions
// come from the paper's figure; the scaling factors 0.35 and 0.24 are this
// design's choice, picked so that rounding GELU reproduces that wiring. For
// other sizes the selections are computed from the GELU formula (tanh form)
// at elaboration time, and elaboration fails if the rounded function cannot
// be realised with one NOT/OR pair per output bit.
//
// Interface: purely combinational.
module gelu_si
  import ascend_pkg::*;
#(
  parameter int unsigned L_IN      = 8,
  parameter int unsigned L_OUT     = 2,
  parameter real         ALPHA_IN  = 0.35,
  parameter real         ALPHA_OUT = 0.24
) (
  input  logic [L_IN-1:0]  x,
  output logic [L_OUT-1:0] y
);

  localparam bit OK = gelu_realisable(int'(L_IN), int'(L_OUT), ALPHA_IN, ALPHA_OUT);

  // elaboration-time parameter check
  if (!OK) begin : g_param_check
    $error("gelu_si: rounded GELU is not realisable by gate-assisted SI");
  end

  for (genvar i = 0; i < int'(L_OUT); i++) begin : g_out
    localparam int LO = gelu_lo(int'(L_IN), int'(L_OUT), ALPHA_IN, ALPHA_OUT, i);
    localparam int HI = gelu_hi(int'(L_IN), int'(L_OUT), ALPHA_IN, ALPHA_OUT, i);
    logic low_run, high_run;
    // low run: n < LO, i.e. NOT of the wire "n >= LO"
    if (LO == 0) begin : g_lo_none
      assign low_run = 1'b0;
    end else if (LO > int'(L_IN)) begin : g_lo_all
      assign low_run = 1'b1;
    end else begin : g_lo_wire
      assign low_run = ~x[int'(L_IN) - LO];
    end
    // high run: n >= HI, the wire itself
    if (HI == 0) begin : g_hi_all
      assign high_run = 1'b1;
    end else if (HI > int'(L_IN)) begin : g_hi_none
      assign high_run = 1'b0;
    end else begin : g_hi_wire
      assign high_run = x[int'(L_IN) - HI];
    end
    assign y[int'(L_OUT) - 1 - i] = low_run | high_run;
  end

endmodule
