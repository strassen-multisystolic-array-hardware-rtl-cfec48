// smm_pkg -- types and helper functions shared by the Strassen multisystolic
// array (SMM) modules.
//
// The MXU works on "vectors": one row of every A sub-block (or one column of
// every B sub-block, or one row of every C sub-block) of the lowest recursion
// level, presented in a single clock cycle.  Inside the MXU the sub-blocks are
// ordered as a quadtree: at every recursion level the most significant base-4
// digit of the sub-block index selects the quadrant (0 = 11, 1 = 12, 2 = 21,
// 3 = 22), so each quadrant is a contiguous slice of the vector.  Memories use
// the plain row-major order of sub-blocks; qt_index() converts between the two.
//
// Widths follow the fixed-point rules: every Strassen level adds one bit to
// the multiplier inputs, and the accumulator of the lowest-level array adds
// ceil(log2(X)) bits to the 2*w-bit product.  All C-side arithmetic is done
// modulo 2^cw(); since the true result fits in cw() bits this is exact.
package smm_pkg;

  // Quadrant codes, most significant base-4 digit of a quadtree index.
  localparam int unsigned Q11 = 0;
  localparam int unsigned Q12 = 1;
  localparam int unsigned Q21 = 2;
  localparam int unsigned Q22 = 3;

  // Width of the lowest-level products/accumulators and of the C vectors:
  // multiplier inputs are w+r bits, so products are 2(w+r) bits, plus
  // ceil(log2(x)) accumulation bits.
  function automatic int unsigned cw(int unsigned w, int unsigned r, int unsigned x);
    return 2 * (w + r) + $clog2(x);
  endfunction

  // Quadtree index of the sub-block in block-row p, block-column q of a
  // 2^r x 2^r grid: bits of p and q interleaved, p the more significant bit
  // of every base-4 digit.
  function automatic int unsigned qt_index(int unsigned p, int unsigned q, int unsigned r);
    int unsigned idx;
    idx = 0;
    for (int unsigned l = 0; l < r; l++)
      idx |= (((p >> l) & 1) << (2 * l + 1)) | (((q >> l) & 1) << (2 * l));
    return idx;
  endfunction

  // Latency, in cycles, of an SMM_r MXU with X x Y lowest-level arrays, from
  // lane 0 of an A row entering the skew buffer to the de-skewed C row.
  function automatic int unsigned mxu_latency(int unsigned r, int unsigned x, int unsigned y,
                                              int unsigned q_extra);
    return x + y + r * (2 + q_extra);
  endfunction

endpackage
