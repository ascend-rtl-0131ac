// sc_mul -- thermometer-code multiplier.
//
// Multiplies two thermometer streams a (LA bits) and b (LB bits) and returns
// the exact product as a thermometer stream z of LZ = LA*LB/2 bits. With
// a = alpha_a*(na - LA/2) and b = alpha_b*(nb - LB/2), z carries
// (na - LA/2)*(nb - LB/2) + LZ/2 ones and its scaling factor is
// alpha_a*alpha_b, so the product is exact and deterministic. The product
// range [-LA*LB/4, LA*LB/4] exactly fills the LZ-bit output.
//
// The ASCEND paper implements multiplication of thermometer streams "based on
// a truth table"; this module is that truth table written behaviourally
// (count the ones, multiply, re-encode) so that synthesis derives the gates.
// Counting ones rather than locating the 0/1 edge is this design's choice; it
// makes the result well defined for any input pattern.
//
// Interface: purely combinational, LA and LB must be even.
module sc_mul #(
  parameter int unsigned LA = 4,
  parameter int unsigned LB = 8,
  localparam int unsigned LZ = LA * LB / 2
) (
  input  logic [LA-1:0] a,
  input  logic [LB-1:0] b,
  output logic [LZ-1:0] z
);

  // elaboration-time parameter check
  if ((LA % 2) != 0 || (LB % 2) != 0) begin : g_param_check
    $error("sc_mul: stream lengths must be even (LA=%0d LB=%0d)", LA, LB);
  end

  int va, vb, cz;

  always_comb begin
    va = int'($countones(a)) - int'(LA / 2);
    vb = int'($countones(b)) - int'(LB / 2);
    cz = va * vb + int'(LZ / 2);
    for (int i = 0; i < int'(LZ); i++)
      z[int'(LZ) - 1 - i] = (cz >= i + 1);
  end

endmodule
