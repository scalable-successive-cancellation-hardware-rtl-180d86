// polar_pkg -- shared types and memory-map helpers of the semi-parallel
// successive-cancellation (SC) polar decoder.
//
// The decoder keeps three kinds of on-chip tables, all organised as words of
// P elements:
//   * internal LLRs: stage l (1..n-1) writes 2^l LLRs; the first half goes to
//     LLR SRAM 1, the second half to LLR SRAM 2, so that the next stage reads
//     operand a from SRAM 1 and operand b from SRAM 2 at the same word address.
//     A region that is smaller than one word still takes one word.
//   * partial sums "A": region l (1..n-1) holds the 2^l partial sums consumed by
//     the g function of stage l.
//   * partial sums "B": region l (1..n-2) holds the encoding of a right-hand
//     sub-block that the encoder has yet to merge with its left-hand sibling.
// Region sizes and base addresses are pure functions of N and P; the helpers
// below compute them and are evaluated at elaboration time (as constants) or on
// a small stage index (as a few adders) by the controller.
// The region layout is a choice of this design; the paper gives only the total
// memory sizes (its Table IV) and the word widths (its Fig. 1).
package polar_pkg;

  // Phase of the decoder schedule (see sc_controller).
  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,   // no frame being decoded
    PH_DEC  = 2'd1,   // f or g on stage l >= 1, one word of P nodes per cycle
    PH_FG   = 2'd2,   // chained f/g on stage 0: two bits decided
    PH_ENC  = 2'd3    // partial-sum encoder stage
  } phase_t;

  // Number of P-wide words a region of `size` elements occupies.
  function automatic int unsigned region_words(int unsigned size, int unsigned p);
    return (size <= p) ? 1 : size / p;
  endfunction

  // Base word address of internal-LLR region l (l >= 1); each SRAM holds
  // half of the region, i.e. 2^(l-1) LLRs.
  function automatic int unsigned llr_base(int unsigned l, int unsigned p);
    int unsigned acc = 0;
    for (int unsigned m = 1; m < l; m++) acc += region_words(1 << (m - 1), p);
    return acc;
  endfunction

  // Words per LLR SRAM for a code of length 2^n.
  function automatic int unsigned llr_depth(int unsigned n, int unsigned p);
    return llr_base(n, p);
  endfunction

  // Base word address of partial-sum region l (l >= 1), 2^l bits each.
  function automatic int unsigned ps_base(int unsigned l, int unsigned p);
    int unsigned acc = 0;
    for (int unsigned m = 1; m < l; m++) acc += region_words(1 << m, p);
    return acc;
  endfunction

  // Address width that can index `depth` words (at least 1 bit).
  function automatic int unsigned aw(int unsigned depth);
    return (depth <= 2) ? 1 : $clog2(depth);
  endfunction

endpackage
