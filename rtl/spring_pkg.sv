// spring_pkg -- shared constants, types and arithmetic of the profiled RINN
// streaming core.
//
// Number formats follow the evaluated configuration: data ap_fixed<2,1>
// (2-bit two's complement, 1 fractional bit) and profile elements
// ap_fixed<10,10> (10-bit integers). Weights use the data format. The
// networks are only trained symbolically, so weights are not data here: they
// come from a fixed integer hash of (layer seed, weight index), written out in
// weight_raw() so that any model can recompute them.
package spring_pkg;

  // Data path: ap_fixed<DATA_W, DATA_I>
  localparam int unsigned DATA_W = 2;
  localparam int unsigned DATA_I = 1;
  localparam int unsigned DATA_F = DATA_W - DATA_I;
  // Profile stream element: ap_fixed<10,10>
  localparam int unsigned PF_W   = 10;

  typedef enum logic [0:0] {ACT_LINEAR = 1'b0, ACT_SIGMOID = 1'b1} act_e;

  // Weight in raw two's complement of width w (value = raw * 2^-frac).
  // h = (idx * 0x9E3779B1 + seed * 0x85EBCA77) mod 2^32; h ^= h >> 15;
  // raw = bits [w+7:8] of h, sign-extended.
  function automatic int weight_raw(int unsigned seed, int unsigned idx, int unsigned w);
    logic [31:0] h;
    logic [31:0] f;
    h = idx * 32'h9E37_79B1 + seed * 32'h85EB_CA77;
    h = h ^ (h >> 15);
    f = (h >> 8) & ((32'd1 << w) - 32'd1);
    if (f[w-1]) return int'(f) - (1 << w);
    return int'(f);
  endfunction

  // Requantise an accumulator with 2*frac fractional bits to a w-bit value with
  // frac fractional bits: arithmetic shift (truncation toward -inf), then
  // saturation to the w-bit signed range.
  function automatic int requant(longint acc, int unsigned frac, int unsigned w);
    longint v;
    longint hi;
    longint lo;
    v  = acc >>> frac;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  // Saturate a plain integer to the w-bit signed range.
  function automatic int sat(int v, int unsigned w);
    int hi;
    int lo;
    hi = (1 << (w - 1)) - 1;
    lo = -(1 << (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Hard sigmoid clamp(x/4 + 1/2, 0, max) on an accumulator with 2*frac
  // fractional bits, result with frac fractional bits in w bits.
  function automatic int hard_sigmoid(longint acc, int unsigned frac, int unsigned w);
    longint v;
    v = (acc >>> (frac + 2)) + ((64'sd1 <<< frac) >>> 1);
    if (v < 0) return 0;
    if (v > (64'sd1 <<< (w - 1)) - 1) return (1 << (w - 1)) - 1;
    return int'(v);
  endfunction

endpackage
