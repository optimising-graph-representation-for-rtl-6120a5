// gg_pkg -- constants and helper functions shared by the event-graph generator.
//
// The generator turns a stream of event-camera events into a time-directed graph.
// Each event is normalised to an integer cube 0..SIZE-1 in x, y and t, and its
// edges are found by reading a (2R+1)x(2R+1) window of a "neighbour matrix" that
// keeps, per pixel, the timestamp of the newest event seen there.
//
// The default sizes (SIZE = 256, R = 3, a 1024-entry FIFO of 25-bit words) are the
// configuration the original design was built for. The numbering of the context
// candidates (raster order over the window, centre skipped) is this design's choice.
package gg_pkg;

  parameter int unsigned SIZE_DEF       = 256;   // graph size per axis
  parameter int unsigned R_DEF          = 3;     // search radius
  parameter int unsigned FIFO_DEPTH_DEF = 1024;  // event queue depth

  // Number of context candidates: the (2R+1)^2 window without its centre.
  function automatic int unsigned n_cand(input int unsigned r);
    return (2 * r + 1) * (2 * r + 1) - 1;
  endfunction

  // Read cycles per event: one read of the centre (duplicate check) plus the
  // candidates, two reads per cycle (two BRAM ports).
  function automatic int unsigned n_read_cycles(input int unsigned r);
    return (n_cand(r) + 1 + 1) / 2;
  endfunction

  // Offset of candidate k (0 .. n_cand-1) inside the window, in raster order
  // (dy major, dx minor), the centre cell skipped.
  function automatic int cand_dx(input int unsigned k, input int unsigned r);
    int unsigned side, pos;
    side = 2 * r + 1;
    pos  = (k < r * side + r) ? k : k + 1;
    return int'(pos % side) - int'(r);
  endfunction

  function automatic int cand_dy(input int unsigned k, input int unsigned r);
    int unsigned side, pos;
    side = 2 * r + 1;
    pos  = (k < r * side + r) ? k : k + 1;
    return int'(pos / side) - int'(r);
  endfunction

endpackage
