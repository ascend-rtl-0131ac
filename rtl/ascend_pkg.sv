// ascend_pkg -- constants and elaboration-time helpers shared by the
// thermometer-coded stochastic-computing (SC) blocks.
//
// Number format used everywhere in this design: an L-bit thermometer stream
// x holds n ones and represents the value alpha * (n - L/2), where alpha is a
// scaling factor that lives only in the designer's bookkeeping, never in the
// hardware. The ones fill the stream from the most significant index down:
// x[L-1] is the first bit to become 1 as the value grows, x[0] the last. We
// speak of the "rank" of a bit: rank r is index L-1-r, and in a valid
// thermometer stream the bit of rank r is 1 exactly when n >= r+1.
//
// Because a valid stream is fully described by "n >= r+1" bits, any monotone
// mapping n -> n' can be wired without gates: output rank i is simply the
// input bit of rank t_i - 1, where t_i is the smallest n for which the output
// count reaches i+1 (or a constant when no such n exists / when t_i is 0).
// That is what selective interconnect (SI) is. The functions below compute
// those thresholds t_i at elaboration time for rescaling and for GELU.
//
// The bit ordering and the GELU tanh approximation are this design's choices;
// the thermometer value definition follows the ASCEND encoding.
package ascend_pkg;

  // Floor division for a positive divisor (SystemVerilog '/' truncates to 0).
  function automatic int floor_div(input int a, input int b);
    int q;
    q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  // Rounded, unclipped value produced by scaling the value of an L_IN-bit
  // stream holding n ones by UP/DOWN: floor((n - L_IN/2)*UP/DOWN + 1/2).
  function automatic int rescale_value(input int n, input int L_IN,
                                       input int UP, input int DOWN);
    return floor_div((2*n - L_IN)*UP + DOWN, 2*DOWN);
  endfunction

  // Output length that holds the whole rescaled range of an L_IN-bit input.
  function automatic int rescale_len(input int L_IN, input int UP, input int DOWN);
    return 2 * rescale_value(L_IN, L_IN, UP, DOWN);
  endfunction

  // Smallest n in [0, L_IN] whose rescaled, clipped output count reaches
  // i+1; L_IN+1 when none does.
  function automatic int rescale_thr(input int L_IN, input int L_OUT,
                                     input int UP, input int DOWN, input int i);
    for (int n = 0; n <= L_IN; n++)
      if (rescale_value(n, L_IN, UP, DOWN) + L_OUT/2 >= i+1) return n;
    return L_IN + 1;
  endfunction

  // GELU, tanh form: 0.5x(1 + tanh(sqrt(2/pi)(x + 0.044715x^3))).
  function automatic real gelu(input real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  // Output count (number of ones, 0..L_OUT) of the quantized GELU for an
  // input stream holding n ones: clip(round(GELU(a_in*(n-L_IN/2))/a_out)+L_OUT/2).
  function automatic int gelu_count(input int n, input int L_IN, input int L_OUT,
                                    input real a_in, input real a_out);
    int c;
    c = $rtoi($floor(gelu(a_in * (real'(n) - real'(L_IN) / 2.0)) / a_out + 0.5))
        + L_OUT/2;
    if (c < 0) c = 0;
    if (c > L_OUT) c = L_OUT;
    return c;
  endfunction

  // Gate-assisted SI wiring for output rank i (needs count >= i+1):
  // the output is 1 for n < lo or n >= hi.
  function automatic int gelu_lo(input int L_IN, input int L_OUT,
                                 input real a_in, input real a_out, input int i);
    int lo;
    lo = 0;
    while (lo <= L_IN && gelu_count(lo, L_IN, L_OUT, a_in, a_out) >= i+1) lo++;
    return lo;
  endfunction

  function automatic int gelu_hi(input int L_IN, input int L_OUT,
                                 input real a_in, input real a_out, input int i);
    int hi;
    hi = L_IN + 1;
    while (hi > 0 && gelu_count(hi-1, L_IN, L_OUT, a_in, a_out) >= i+1) hi--;
    return hi;
  endfunction

  // 1 when, for every output rank, the set {n : count >= i+1} is a prefix
  // plus a suffix of [0, L_IN], i.e. the NOT/OR pair can realise it.
  function automatic bit gelu_realisable(input int L_IN, input int L_OUT,
                                         input real a_in, input real a_out);
    for (int i = 0; i < L_OUT; i++) begin
      int lo, hi;
      lo = gelu_lo(L_IN, L_OUT, a_in, a_out, i);
      hi = gelu_hi(L_IN, L_OUT, a_in, a_out, i);
      for (int n = 0; n <= L_IN; n++)
        if ((gelu_count(n, L_IN, L_OUT, a_in, a_out) >= i+1) != (n < lo || n >= hi))
          return 1'b0;
    end
    return 1'b1;
  endfunction

  function automatic int clog2i(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

endpackage
