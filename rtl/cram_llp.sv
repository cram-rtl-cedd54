// cram_llp -- Line Location Predictor.
//
// Compression moves lines: B may be in its own location or packed into A's,
// D in its own, in C's or in A's. To fetch a line in one access CRAM predicts
// the group's compression level and derives the location from it. Lines of a
// page tend to compress alike, so, as in the paper, the predictor is a
// Last Compressibility Table (LCT) of ENTRIES = 512 two-bit entries (128
// bytes) indexed by a hash of the page address, holding the last compression
// level seen for a page mapping to that entry. Line A (offset 00) never needs
// a prediction: it is always read from its own location.
//
// Design choices where the paper is silent: 4 KB pages (64 lines, so the page
// address is the line address without its low 6 bits); the hash XOR-folds the
// page address into log2(ENTRIES) bits; entries reset to "uncompressed"
// (memory starts uncompressed); the entry is rewritten with the level found on
// every completed read, which also covers the update on a misprediction.
//
// Timing: prediction is combinational from `pred_addr`; an update is written
// at the next clock edge. The predicted location shares the group address
// with the request (Fig. 9), so pred_loc[29:2] is pred_addr[29:2] by design,
// which lint reports as outputs driven from an input.
module cram_llp
  import cram_pkg::*;
#(
  parameter int unsigned ENTRIES        = 512,
  parameter int unsigned PAGE_LINE_BITS = 6
) (
  input  logic   clk,
  input  logic   rst_n,
  input  laddr_t pred_addr,
  output level_e pred_level,
  output laddr_t pred_loc,
  input  logic   upd_valid,
  input  laddr_t upd_addr,
  input  level_e upd_level
);

  localparam int unsigned IDX_W  = $clog2(ENTRIES);
  localparam int unsigned PAGE_W = ADDR_W - PAGE_LINE_BITS;

  function automatic logic [IDX_W-1:0] page_hash(input laddr_t a);
    logic [PAGE_W-1:0] pg;
    logic [IDX_W-1:0]  h;
    pg = a[ADDR_W-1:PAGE_LINE_BITS];
    h  = '0;
    for (int i = 0; i < PAGE_W; i += IDX_W)
      h ^= IDX_W'(pg >> i);
    return h;
  endfunction

  level_e lct [ENTRIES];

  always_comb begin
    pred_level = (pred_addr[1:0] == 2'b00) ? LVL_UNCOMP : lct[page_hash(pred_addr)];
    pred_loc   = level_loc(pred_addr, pred_level);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) lct[i] <= LVL_UNCOMP;
    end else if (upd_valid) begin
      lct[page_hash(upd_addr)] <= upd_level;
    end
  end

endmodule
