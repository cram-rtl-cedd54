// cram_pkg -- types and constants shared by the CRAM compressed-memory logic.
//
// A memory line is 64 bytes (512 bits); byte k of a line sits in bits
// [8k+7:8k], so "the last four bytes" where the markers live are bits
// [511:480]. Lines are addressed by a 30-bit line address (the width the
// Line Inversion Table stores per entry); four neighbouring lines whose
// addresses differ only in bits [1:0] form a compression group (A, B, C, D).
//
// The 2-bit compression level is the value kept per line in the last-level
// cache tag and in the location predictor: 00 uncompressed, 01 stored 2-to-1
// with its neighbour, 10 stored 4-to-1 with the whole group. The numeric
// codes are this design's choice; the paper only fixes that the field is
// two bits wide.
package cram_pkg;

  localparam int unsigned LINE_BITS   = 512;
  localparam int unsigned MARKER_BITS = 32;
  localparam int unsigned ADDR_W      = 30;   // line address width
  localparam int unsigned SLOT2_BYTES = 30;   // per-line space in a 2-to-1 line (60 B / 2)
  localparam int unsigned SLOT4_BYTES = 15;   // per-line space in a 4-to-1 line (60 B / 4)
  localparam int unsigned SLOT_BITS   = SLOT2_BYTES * 8;
  localparam logic [7:0]  FPC_ID      = 8'd5;  // slot encoding id of an FPC slot (BDI uses 0..4)

  typedef logic [LINE_BITS-1:0]   line_t;
  typedef logic [MARKER_BITS-1:0] marker_t;
  typedef logic [ADDR_W-1:0]      laddr_t;
  typedef logic [SLOT_BITS-1:0]   slot_t;

  typedef enum logic [1:0] {
    LVL_UNCOMP = 2'b00,
    LVL_2TO1   = 2'b01,
    LVL_4TO1   = 2'b10
  } level_e;

  // What a line read from memory turned out to be.
  typedef enum logic [2:0] {
    ST_UNCOMP   = 3'd0,  // no marker: plain data
    ST_2TO1     = 3'd1,  // last 4 bytes equal the 2-to-1 marker
    ST_4TO1     = 3'd2,  // last 4 bytes equal the 4-to-1 marker
    ST_INVALID  = 3'd3,  // whole line equals Marker-IL: stale copy
    ST_INV_CAND = 3'd4   // matches a complemented marker: consult the LIT
  } rd_status_e;

  // Per-line markers of one memory location.
  typedef struct packed {
    marker_t m2;
    marker_t m4;
    line_t   il;
  } line_markers_t;

  // Location of line `a` when its group is stored at compression level `lv`
  // (restricted mapping of the paper's Fig. 9): a 4-to-1 group lives in the
  // location of A (offset 00), a 2-to-1 pair in the location of its first
  // line (A for A/B, C for C/D), an uncompressed line in its own location.
  function automatic laddr_t level_loc(input laddr_t a, input level_e lv);
    unique case (lv)
      LVL_4TO1: return {a[ADDR_W-1:2], 2'b00};
      LVL_2TO1: return {a[ADDR_W-1:2], a[1], 1'b0};
      default:  return a;
    endcase
  endfunction

endpackage
