// fsync_pkg: constants shared by the long-syncword frame synchronizer.
//
// The syncword length and threshold defaults are the 300-bit configuration
// the design is evaluated with (threshold 210, i.e. 70 % of the syncword).
// The window width (bit positions tested per clock) and payload length are
// this design's own choices: 15 positions per clock gives 3.75 Gbit/s at an
// assumed 250 MHz clock, the line rate reported for the 300-bit version.
// The helper functions give the widths every block derives from these sizes.
package fsync_pkg;

  // Syncword length k in bits (300-bit configuration).
  localparam int unsigned SYNC_LEN_DEFAULT = 300;
  // Correlation threshold; a detection needs more matching bits than this.
  localparam int unsigned THRESHOLD_DEFAULT = 210;
  // Sliding-window width m: syncword positions tested (and bits accepted) per clock.
  localparam int unsigned WINDOW_DEFAULT = 15;
  // Payload length n in bits (n >> k).
  localparam int unsigned PAYLOAD_LEN_DEFAULT = 3000;

  // Width of a correlation value that can count 0..k matching bits.
  function automatic int unsigned corr_width(int unsigned k);
    return $clog2(k + 1);
  endfunction

  // Width of an index 0..m-1 (at least one bit).
  function automatic int unsigned idx_width(int unsigned m);
    return (m > 1) ? $clog2(m) : 1;
  endfunction

  // Number of registered levels in a binary tree over n leaves.
  function automatic int unsigned tree_levels(int unsigned n);
    return (n > 1) ? $clog2(n) : 0;
  endfunction

endpackage
