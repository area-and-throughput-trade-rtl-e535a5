// dwt_pkg -- constants and helper functions shared by the 9/7 lifting DWT.
//
// The six lifting constants are integers scaled by 2^8: the hardware multiplies
// by the integer and then renormalises with an arithmetic right shift of
// FRAC_BITS = 8 bits.  Each constant is a 10-bit two's-complement word; the
// shift-add multipliers build one partial product per set bit, and bit 9 (the
// sign bit) weighs -512.
//
// Constant values: the integer and the binary forms of the coefficient table
// agree for alpha, beta, gamma and 1/k.  For delta and -k they differ
// (114 vs 0b0001110001 = 113, and -314 vs 0b1011000101 = -315); the shift-add
// hardware is built from the binary form, so the binary values are used here.
// Both are plain parameters of the 1D transform and can be changed.
//
// Helper functions give, for a constant, the number of partial products, the
// number of adder-tree levels needed to sum a given number of terms (one
// addition per pipeline stage) and the latency of the resulting multiplier,
// pipelined (one addition per stage) or not (one register at the output).
package dwt_pkg;

  localparam int FRAC_BITS = 8;   // renormalising right shift
  localparam int COEF_W    = 10;  // width of the fixed-point constants

  localparam int C_ALPHA = -406;  // -1.586134342 * 256
  localparam int C_BETA  = -14;   // -0.052980118 * 256
  localparam int C_GAMMA = 226;   //  0.882911075 * 256
  localparam int C_DELTA = 113;   //  0.443506852 * 256 (binary form)
  localparam int C_NEG_K = -315;  // -1.230174105 * 256 (binary form)
  localparam int C_INV_K = 208;   //  0.812893066 * 256

  // Number of set bits in the COEF_W-bit two's-complement form of c.
  function automatic int coef_terms(input int c);
    int n;
    logic [COEF_W-1:0] b;
    b = COEF_W'(c);
    n = 0;
    for (int i = 0; i < COEF_W; i++) n += int'(b[i]);
    return n;
  endfunction

  // Number of levels of a binary adder tree that sums n terms.
  function automatic int tree_levels(input int n);
    int l;
    int m;
    l = 0;
    m = n;
    while (m > 1) begin
      m = (m + 1) / 2;
      l++;
    end
    return l;
  endfunction

  // Number of nodes at level l of such a tree (level 0 = the terms).
  function automatic int tree_width(input int n, input int l);
    int m;
    m = n;
    for (int i = 0; i < l; i++) m = (m + 1) / 2;
    return m;
  endfunction

  // Latency, in clock cycles, of a shift_add_mult instance: one cycle per
  // addition level when pipelined, a single output register otherwise.
  function automatic int mult_latency(input int c, input bit preadd, input bit acc,
                                      input bit pipelined);
    if (!pipelined) return 1;
    return int'(preadd) + tree_levels(coef_terms(c) + int'(acc));
  endfunction

endpackage
