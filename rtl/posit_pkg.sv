// posit_pkg: constants shared by the posit arithmetic units and the two accelerators.
//
// A posit(N,ES) word is a sign bit, a run-length coded regime, up to ES exponent bits and the
// remaining fraction bits. Its value is (-1)^s * useed^k * 2^e * (1.f) with useed = 2^(2^ES);
// the all-zero word is 0 and 100..0 is NaR (not a real). The word sizes and latencies below are
// the ones of the published accelerators: 64-bit posits, ES = 18 in the forward-algorithm unit,
// ES = 12 in the column unit, 12-cycle multipliers and 8-cycle adders.
package posit_pkg;

  localparam int unsigned POSIT_N    = 64;  // word width of every posit in both accelerators
  localparam int unsigned FAU_ES     = 18;  // forward-algorithm unit: posit(64,18)
  localparam int unsigned CU_ES      = 12;  // column unit: posit(64,12)
  localparam int unsigned MUL_LAT    = 12;  // posit multiplier latency in cycles
  localparam int unsigned ADD_LAT    = 8;   // posit adder latency in cycles

  // Which table a host write goes to (forward-algorithm unit configuration port).
  typedef enum logic [1:0] {
    CFG_A     = 2'd0,   // transition matrix A[row][col]
    CFG_B     = 2'd1,   // emission matrix B[row = state][col = symbol]
    CFG_ALPHA = 2'd2    // initial alpha[row]
  } fau_cfg_e;

  // Width of the signed scale (k * 2^ES + e) of a posit(n, es): |k| <= n-2, e < 2^es.
  // Two extra bits leave room for the sum of two scales plus normalisation.
  function automatic int unsigned scale_width(int unsigned n, int unsigned es);
    return $clog2((n - 1) * (1 << es)) + 3;
  endfunction

  // Maximum number of fraction bits of a posit(n, es): sign and two regime bits are mandatory.
  function automatic int unsigned frac_width(int unsigned n, int unsigned es);
    return n - 3 - es;
  endfunction

  // Bit pattern of 1.0: sign 0, regime 10, everything else 0.
  function automatic logic [63:0] posit_one(int unsigned n);
    logic [63:0] p;
    p = '0;
    p[n-2] = 1'b1;
    return p;
  endfunction

endpackage
