// da_pkg: constants shared by the distributed-arithmetic (DA) FIR filter.
//
// The filter computes y[t] = sum_i coef[i] * x[t-i] without multipliers.
// Samples are B-bit two's-complement numbers. Coefficients are C-bit
// two's-complement numbers. B = 3 and C = 16 are the values used for every
// filter in the evaluation. DEF_N = 143 is the highest filter order that was
// evaluated. DEF_NUM_LUTS and DEF_LUT_BITS (the LUT partition) are this
// design's own choice, because no partition is published. A partition is a
// count m of LUTs plus a list of their address widths k_i (lut_bits_t).
package da_pkg;
  localparam int unsigned B_BITS       = 3;    // input sample width B
  localparam int unsigned C_BITS       = 16;   // coefficient width C
  localparam int unsigned DEF_N        = 143;  // filter order N (number of taps)
  localparam int unsigned DEF_NUM_LUTS = 16;   // m, number of basic LUTs (assumed)
  localparam int unsigned DEF_LUT_BITS = 4;    // k_i, address bits per LUT (assumed)
  localparam int unsigned MAX_LUTS     = 64;   // capacity of the k_i list (assumed)

  // Address bits k_1 .. k_m of the basic LUTs. Entry j is LUT j's k_j. Only
  // the first m entries are used. The k_i may differ from LUT to LUT.
  typedef int unsigned lut_bits_t [MAX_LUTS];
  localparam lut_bits_t DEF_KI = '{default: DEF_LUT_BITS};

  // First plane bit of LUT j: k_0 + ... + k_(j-1). With j = m, this is k.
  function automatic int unsigned lut_offset(lut_bits_t k, int unsigned j);
    int unsigned s = 0;
    for (int unsigned i = 0; i < j; i++) s += k[i];
    return s;
  endfunction

  // Width that holds a sum of n signed words of width w.
  function automatic int unsigned sum_width(int unsigned w, int unsigned n);
    return w + ((n > 1) ? $clog2(n) : 0);
  endfunction
endpackage
