// qrm_pkg -- shared constants, encodings and helper functions of the
// quadrant-based rearrangement (QRM) accelerator.
//
// The accelerator splits a W x W atom-occupancy bit-field into four W/2 x W/2
// quadrants, mirrors each so that the corner next to the array centre becomes
// index 0, compresses every quadrant toward that corner with the same shift
// pipeline, and reports the atom moves in the coordinates of the original
// array.  This package holds what several modules share:
//   * PKT_W, the width of one input/output packet.  The 1024 bits come from
//     the design this RTL follows; everything else here is this design's own.
//   * quad_e, the quadrant names, and the move-record layout.  A move record
//     is a packed vector, MSB first:
//         { iter[TAG_W], axis, side, line[IDX_W], sel[W] }
//     axis 0 = horizontal move (atoms slide along rows), 1 = vertical.
//     side 0 = west (H) / north (V), 1 = east (H) / south (V).
//     line  = original index of the column (H) or row (V) whose holes are
//             being filled; atoms on the far side of it move one site toward
//             the centre.
//     sel   = one bit per original row (H) or column (V) taking part.
//     The width depends on W and on the number of iterations, so the record
//     is kept as a plain vector and built / taken apart with the functions
//     below rather than with a struct.
package qrm_pkg;

  localparam int PKT_W = 1024;

  typedef enum logic [1:0] {
    QUAD_NW = 2'd0,
    QUAD_NE = 2'd1,
    QUAD_SW = 2'd2,
    QUAD_SE = 2'd3
  } quad_e;

  localparam logic AXIS_H = 1'b0;
  localparam logic AXIS_V = 1'b1;

  function automatic int tag_w(int n_iter);
    return (n_iter > 1) ? $clog2(n_iter) : 1;
  endfunction

  function automatic int idx_w(int w);
    return (w > 1) ? $clog2(w) : 1;
  endfunction

  function automatic int rec_w(int w, int n_iter);
    return tag_w(n_iter) + 2 + idx_w(w) + w;
  endfunction

  // Output FIFO depth that holds everything one job can produce: at most
  // four merged records per step, W/2 steps per pass, two passes per
  // iteration, packed floor(PKT_W/REC_W) to a beat, plus the array beats.
  function automatic int out_fifo_depth(int w, int n_iter);
    int recs = n_iter * 2 * 2 * (w / 2);
    int rpb  = PKT_W / rec_w(w, n_iter);
    return (recs + rpb - 1) / rpb + (w * w + PKT_W - 1) / PKT_W;
  endfunction

  // Quadrants north of the centre line / west of the centre line.
  function automatic bit is_north(quad_e q);
    return (q == QUAD_NW) || (q == QUAD_NE);
  endfunction

  function automatic bit is_west(quad_e q);
    return (q == QUAD_NW) || (q == QUAD_SW);
  endfunction

endpackage
