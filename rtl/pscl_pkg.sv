// pscl_pkg: shared types and helper functions of the partitioned
// successive-cancellation list (PSCL) polar decoder.
//
// LLR memories are organised in rows of PE words (PE = number of processing
// lanes, a power of two). A tree node at level s holds 2^s LLRs and occupies
// level_rows(s) = max(1, 2^s / PE) rows; a node smaller than a row uses the low
// lanes of one row. Levels are laid out one after another, lowest level first,
// so the first row of level s is the sum of the rows of the levels below it.
package pscl_pkg;

  // The two LLR update rules of SC decoding (f: left child, g: right child).
  typedef enum logic {
    OP_F = 1'b0,
    OP_G = 1'b1
  } llr_op_e;

  // Rows taken by one node at level s when a row holds 2^pe_log LLRs.
  function automatic int unsigned level_rows(int unsigned s, int unsigned pe_log);
    return (s > pe_log) ? (32'd1 << (s - pe_log)) : 32'd1;
  endfunction

  // First row of level s in a memory whose lowest stored level is lo.
  function automatic int unsigned level_base(int unsigned s, int unsigned lo,
                                             int unsigned pe_log);
    int unsigned b;
    b = 0;
    for (int unsigned k = 0; k < 32; k++)
      if (k >= lo && k < s) b += level_rows(k, pe_log);
    return b;
  endfunction

  // Rows needed for levels lo..hi inclusive.
  function automatic int unsigned rows_total(int unsigned lo, int unsigned hi,
                                             int unsigned pe_log);
    return level_base(hi + 1, lo, pe_log);
  endfunction

  // Number of trailing zeros of v (width bits); returns width for v == 0.
  function automatic int unsigned ctz(logic [31:0] v, int unsigned width);
    int unsigned r;
    r = width;
    for (int k = 31; k >= 0; k--)
      if (k < int'(width) && v[k]) r = k;
    return r;
  endfunction

endpackage
