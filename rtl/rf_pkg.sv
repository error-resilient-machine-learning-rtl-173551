// rf_pkg: constants and helper functions shared by the random-forest
// classifier with error weighted voting (RF-EW).
//
// FEAT_W is the full precision of a feature and of a threshold (8 bits, as
// for the 8b comparator arrays of the reference forests). WEIGHT_W is the
// width of a normalized vote weight p'_l, an unsigned fraction with all bits
// below the binary point; this width is a choice of this design, the source
// gives the weights only as real numbers.
//
// dt_precision() gives the data-path precision of tree l. Each tree of the
// RF-EW runs at its own precision drawn uniformly from 4..8 bits, so that the
// trees have different critical paths and hence weakly correlated timing
// errors. The draw here is a fixed xorshift hash of (seed, l), so a given
// seed always yields the same forest; the hash itself is this design's choice.
package rf_pkg;

  localparam int unsigned FEAT_W   = 8;
  localparam int unsigned WEIGHT_W = 8;

  // Precision (bits) of tree l: uniform over [pmin, pmax] when diverse,
  // otherwise pmax for every tree (the uniform-precision RF-M / RF-W forests).
  function automatic int unsigned dt_precision(input int unsigned l,
                                               input int unsigned seed,
                                               input int unsigned pmin,
                                               input int unsigned pmax,
                                               input bit          diverse);
    logic [31:0] h;
    if (!diverse) return pmax;
    h = seed ^ ((l + 32'd1) * 32'h9E37_79B9);
    h = h ^ (h << 13);
    h = h ^ (h >> 17);
    h = h ^ (h << 5);
    return pmin + (h % (pmax - pmin + 1));
  endfunction

endpackage
