// fs_pkg -- shared constants and types of the frame synchronizer.
//
// The synchronizer looks for a marker b_l of l bits inside an l-bit-per-cycle
// stream. Its correlators and its selector are both binary trees of
// ceil(log2 l) registered levels, so the correlation latency is twice that.
// The helper functions below give those depths and the widths of a match
// count (0..l) and of a marker position (0..l-1) for any l.
//
// The beat code of the 2-bit "valid out" signal is this design's own
// encoding: the paper gives the signal's width (two bits) and its purpose
// (capture under way), not the meaning of each code.
package fs_pkg;

  // Depth of a binary tree over n leaves: ceil(log2 n), at least one level.
  function automatic int tree_levels(input int n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Bits needed for a count of 0..n matches.
  function automatic int count_width(input int n);
    return $clog2(n + 1);
  endfunction

  // Bits needed for a position 0..n-1 (at least one).
  function automatic int pos_width(input int n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Latency of the correlation module: adder trees plus selector.
  function automatic int corr_latency(input int n);
    return 2 * tree_levels(n);
  endfunction

  // Meaning of the 2-bit valid out of the payload capture unit.
  //   BEAT_IDLE : no payload bits on the output.
  //   BEAT_HEAD : first beat of a frame; bits l-1..cut are payload. A HEAD
  //               also cancels a frame begun earlier (re-detection).
  //   BEAT_BODY : all l bits are payload.
  //   BEAT_TAIL : last beat; bits cut-1..0 are payload (none when cut = 0).
  typedef enum logic [1:0] {
    BEAT_IDLE = 2'b00,
    BEAT_HEAD = 2'b01,
    BEAT_BODY = 2'b10,
    BEAT_TAIL = 2'b11
  } beat_e;

endpackage
