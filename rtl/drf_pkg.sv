// drf_pkg: constants and helper functions shared by the deep-random-forest
// ACAM accelerator.
//
// The analog quantities of the FeFET analog CAM (threshold voltages of the two
// FeFETs of a cell, search-line voltage) are carried through the RTL as small
// unsigned level codes. VTH_BITS_DEFAULT is the paper's cell precision (three
// bits of threshold states per FeFET). The requantisation of vote counts into
// search codes for the next cascade level is this design's own choice: the
// paper only says that vote vectors are concatenated and passed on.
package drf_pkg;

  // Cell precision used by the published device (8 threshold states).
  localparam int unsigned VTH_BITS_DEFAULT = 3;

  // Width needed to hold the value n (at least 1 bit).
  function automatic int unsigned width_of(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

  // Convert a vote count 0..trees into a search-line code 0..vmax,
  // rounding to nearest: round(votes * vmax / trees).
  function automatic int unsigned vote_to_code(input int unsigned votes,
                                               input int unsigned trees,
                                               input int unsigned vmax);
    return (votes * vmax + trees / 2) / trees;
  endfunction

endpackage
