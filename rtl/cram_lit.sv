// cram_lit -- Line Inversion Table.
//
// When an uncompressed line written to memory happens to carry a marker value
// (a "marker collision"), CRAM stores it bit-inverted and records its line
// address here. On a read whose line matches a complemented marker, the table
// says whether the line was inverted by the writer (address present: invert
// it back) or genuinely holds that value (absent: use as is). When a listed
// line is written again without a collision its entry is removed.
//
// Following the paper: ENTRIES = 16 entries of a valid bit and a 30-bit line
// address (64 bytes), fully associative. On an insert with no free entry the
// sticky `overflow` output rises and stays up until `clear`; the paper's
// recovery (new markers and re-encoding memory) is run by cram_top, which
// pulses `clear` when it starts. `clear` leaves the entries in place. The
// lowest free entry is taken on insert, and inserting an address that is
// already present changes nothing -- both design choices.
//
// Timing: lookup is combinational; an update takes effect at the next clock
// edge. Update and lookup may happen in the same cycle; the lookup sees the
// old contents.
module cram_lit
  import cram_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,        // drop the overflow flag
  input  laddr_t lookup_addr,
  output logic   lookup_hit,
  input  logic   upd_valid,
  input  logic   upd_insert,   // 1: insert, 0: remove
  input  laddr_t upd_addr,
  output logic   overflow,
  output logic [$clog2(ENTRIES+1)-1:0] count
);

  logic   [ENTRIES-1:0] valid;
  laddr_t               tag [ENTRIES];

  logic                         upd_hit, have_free;
  logic [$clog2(ENTRIES)-1:0]   hit_idx, free_idx;

  always_comb begin
    lookup_hit = 1'b0;
    upd_hit    = 1'b0;
    hit_idx    = '0;
    have_free  = 1'b0;
    free_idx   = '0;
    count      = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && tag[i] == lookup_addr) lookup_hit = 1'b1;
      if (valid[i] && tag[i] == upd_addr) begin
        upd_hit = 1'b1;
        hit_idx = i[$clog2(ENTRIES)-1:0];
      end
      count = count + ($clog2(ENTRIES+1))'(valid[i]);
    end
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (!valid[i]) begin
        have_free = 1'b1;
        free_idx  = i[$clog2(ENTRIES)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      overflow <= 1'b0;
    end else if (upd_valid) begin
      if (upd_insert) begin
        if (!upd_hit) begin
          if (have_free) valid[free_idx] <= 1'b1;
          else           overflow        <= 1'b1;
        end
      end else if (upd_hit) begin
        valid[hit_idx] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (upd_valid && upd_insert && !upd_hit && have_free) tag[free_idx] <= upd_addr;
  end

endmodule
