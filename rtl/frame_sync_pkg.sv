// frame_sync_pkg: constants and helper functions shared by the frame
// synchronizer.
//
// The synchronizer correlates a q-bit-per-cycle bit stream against an n-bit
// sync word. Its correlation pipeline has one register per adder-tree level
// and one per comparator-tree level, so the cycles from the window register to
// the Sum/m outputs are ceil(log2 n) + ceil(log2 q). That formula, and the
// widths derived from n and q, live here so that every module and testbench
// uses the same numbers. The latency formula follows the paper; the helper
// names and the rule that an index is at least one bit wide are this design's.
package frame_sync_pkg;

  // ceil(log2(x)) for x >= 1; 0 for x = 1.
  function automatic int unsigned clog2(input int unsigned x);
    int unsigned r;
    r = 0;
    while ((32'd1 << r) < x) r++;
    return r;
  endfunction

  // Bits needed to hold the values 0..x.
  function automatic int unsigned count_width(input int unsigned x);
    return clog2(x + 1);
  endfunction

  // Bits needed for an index 0..x-1, never less than one.
  function automatic int unsigned index_width(input int unsigned x);
    return (clog2(x) < 1) ? 1 : clog2(x);
  endfunction

  // Cycles from the window register to the registered Sum/m outputs.
  function automatic int unsigned corr_latency(input int unsigned n, input int unsigned q);
    return clog2(n) + clog2(q);
  endfunction

endpackage
