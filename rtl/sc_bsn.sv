// sc_bsn -- bitonic sorting network, the SC adder for thermometer streams.
//
// Concatenating thermometer streams that share one scaling factor gives a
// stream whose number of ones is the sum of theirs, i.e. whose value is the
// sum of their values. Sorting that concatenation puts it back into
// thermometer form. This module sorts N bits so that all ones end at the top
// (q[N-1] downwards), which is the bit order used throughout this design.
//
// Structure: a Batcher bitonic sorter on NP = 2**ceil(log2 N) lanes. On bits a
// compare-exchange is an AND (low lane) and an OR (high lane). The N inputs
// sit on the upper lanes and the NP-N lower lanes are tied to 0; since the
// zeros sort to the bottom, the upper N lanes of the result are the sorted
// input. The network has log2(NP)*(log2(NP)+1)/2 layers of NP/2 exchanges.
// The loops below describe that fixed network; synthesis unrolls them. For
// N = 1024 that is 28,160 iterations, more than some front ends unroll by
// default (raise their unroll limit); simulators run the loops as written.
//
// The paper names the BSN as its adder; the bitonic construction and the
// zero padding for non-power-of-two sizes are the standard ones.
//
// Interface: purely combinational.
module sc_bsn
  import ascend_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] d,
  output logic [N-1:0] q
);

  localparam int LOGN = clog2i(int'(N));
  localparam int NP   = 1 << LOGN;

  logic [NP-1:0] v;

  // The network is written as nested loops over phases (block size KB),
  // layers (exchange distance J) and lanes; every iteration is one fixed
  // compare-exchange, so this is the same wiring as a generate-built network.
  always_comb begin
    v = '0;
    v[NP-1 -: N] = d;
    for (int p = 0; p < LOGN; p++) begin
      for (int r = 0; r <= p; r++) begin
        for (int t = 0; t < NP / 2; t++) begin
          // exchange t of this layer joins lanes i and i+J
          int  j, kb, i;
          logic asc, lo_b, hi_b;
          j    = 1 << (p - r);
          kb   = 2 << p;
          i    = (t / j) * 2 * j + (t % j);
          asc  = ((i & kb) == 0);          // ascending: the 1 goes to lane i+J
          lo_b = v[i] & v[i + j];
          hi_b = v[i] | v[i + j];
          v[i]     = asc ? lo_b : hi_b;
          v[i + j] = asc ? hi_b : lo_b;
        end
      end
    end
    q = v[NP-1 -: N];
  end

endmodule
