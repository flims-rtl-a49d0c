// flims_pkg -- shared types and helpers of the FLiMS merger.
//
// An element travelling through the selector stage and the CAS network is a
// packed vector {data, src, order[1:0], port[LOGW-1:0]}.  The three tag fields
// are only meaningful in the stable variant, where they break ties between
// equal keys (source A before B, then earlier batch, then lower bank); in the
// other variants they are constant zero and synthesis removes them.  Placing
// the tags below the data, as tie-breakers, is this implementation's reading
// of the stable-merge description.
package flims_pkg;

  // Selector behaviour, chosen per merger instance.
  //   FLIMS_BASIC  : plain MAX units, ties go to B.
  //   FLIMS_SKEW   : a 1-bit direction register alternates the winner on ties
  //                  so both inputs drain at a similar rate on duplicates.
  //   FLIMS_STABLE : ties go to A, tags keep the original order of duplicates.
  typedef enum logic [1:0] {
    FLIMS_BASIC  = 2'd0,
    FLIMS_SKEW   = 2'd1,
    FLIMS_STABLE = 2'd2
  } variant_e;

  // Number of tag bits carried below the data for a merger of width w.
  function automatic int unsigned tag_width(int unsigned logw);
    return 3 + logw;
  endfunction

endpackage
