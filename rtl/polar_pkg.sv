// polar_pkg: shared types and index helpers of the LSCD partial-sum / path storage.
//
// Storage layout used by every memory in this design: the N decoded bits of a path are
// cut into N/P words of P bits, word w holding bits wP .. wP+P-1 (bit j of the word is
// bit wP+j). After c words have been completed, the completed prefix is split into the
// aligned power-of-two blocks given by the binary expansion of c (largest first); the
// block for bit k of c has 2^k words and is called a level-k group. Each group sits in
// one SRAM, named by a per-path pointer of that level. When the whole frame is done
// (c = N/P) the last word forms an extra group with its own pointer, level n-p.
// These helpers compute the group level of a word and the partner word used by the
// serial encoder; they are pure functions and synthesise to small logic.
package polar_pkg;

  // Which storage scheme the top uses for the decoded bits.
  typedef enum logic {
    SCHEME_MERGED    = 1'b0,  // merged memory only: bits recovered from the partial sums
    SCHEME_FOLDED_PM = 1'b1   // folded PSN plus a separate folded path memory
  } path_scheme_e;

  // Index of the most significant set bit of v (v > 0); 0 for v = 0.
  function automatic int unsigned msb_one(input int unsigned v);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < 32; i++)
      if (v[i]) r = i;
    return r;
  endfunction

  // Index of the most significant zero bit of v among its k lowest bits (v < 2^k - 1).
  function automatic int unsigned msb_zero(input int unsigned v, input int unsigned k);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < 32; i++)
      if (i < k && !v[i]) r = i;
    return r;
  endfunction

  // Number of trailing zero bits of v (v > 0).
  function automatic int unsigned tz(input int unsigned v);
    int unsigned r;
    r = 0;
    for (int i = 31; i >= 0; i--)
      if (v[i]) r = i;
    return r;
  endfunction

  // Group level of word w (w < c) when c words of the frame are complete.
  // nw is the number of words per frame; a full frame puts its last word in level log2(nw).
  function automatic int unsigned word_level(input int unsigned w, input int unsigned c,
                                             input int unsigned nw);
    if (c == nw && w == nw - 1) return msb_one(nw);
    if (c == nw) return msb_one((nw - 1) ^ w);
    return msb_one(c ^ w);
  endfunction

endpackage
