// cram_line_classifier -- implicit-metadata check of a line read from memory.
//
// CRAM needs no metadata lookup to interpret a line: a 2-to-1 compressed line
// always ends (last four bytes) with the 2-to-1 marker, a 4-to-1 line with
// the 4-to-1 marker, a stale location holds the whole 64-byte Marker-IL, and
// uncompressed lines whose data happened to collide with a marker were
// written inverted. So the line is compared with the per-line markers of the
// location it came from and with their complements:
//   whole line == Marker-IL                 -> ST_INVALID
//   last 4 bytes == 2-to-1 marker           -> ST_2TO1
//   last 4 bytes == 4-to-1 marker           -> ST_4TO1
//   last 4 bytes == ~2-to-1 or ~4-to-1, or
//   whole line == ~Marker-IL                -> ST_INV_CAND (the Line Inversion
//                                              Table decides whether to invert)
//   otherwise                               -> ST_UNCOMP
// The comparisons and their meaning follow the paper; checking Marker-IL
// first is this design's ordering (a line equal to Marker-IL cannot also hold
// a valid compressed record, since the writer never stores such a line as is).
//
// Purely combinational.
module cram_line_classifier
  import cram_pkg::*;
(
  input  line_t         data,
  input  line_markers_t lm,
  output rd_status_e    status
);

  marker_t tail;
  assign tail = data[LINE_BITS-1 -: MARKER_BITS];

  always_comb begin
    if (data == lm.il)                              status = ST_INVALID;
    else if (tail == lm.m2)                         status = ST_2TO1;
    else if (tail == lm.m4)                         status = ST_4TO1;
    else if (tail == ~lm.m2 || tail == ~lm.m4 ||
             data == ~lm.il)                        status = ST_INV_CAND;
    else                                            status = ST_UNCOMP;
  end

endmodule
