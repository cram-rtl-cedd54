// cram_marker_regs -- boot-time global marker registers.
//
// CRAM marks compressed lines with a 4-byte marker in their last four bytes
// (one value for 2-to-1 lines, another for 4-to-1 lines) and marks stale
// locations with a 64-byte invalid-line marker (Marker-IL). Following the
// paper, all of them are drawn from a random number generator when the
// machine boots, so every machine has different markers; the paper also
// requires that the two 4-byte markers are not the complement of each other.
// This block also refuses two equal 4-byte markers (otherwise a 2-to-1 line
// could not be told from a 4-to-1 line) -- a design choice.
//
// After reset it takes 32-bit words from the generator over a valid/ready
// port, one per accepted cycle, in this order:
//   word 0        2-to-1 marker
//   word 1        4-to-1 marker (re-drawn while equal or complementary to word 0)
//   words 2..17   Marker-IL, word 2 in bytes 0..3
//   words 18..19  64-bit key of the per-line marker hash (four 16-bit round keys)
// `ready` rises the cycle after the last word and the values then stay fixed
// until `reload` (one cycle, used after a LIT overflow) drops `ready` and
// loads a fresh set of 20 words the same way, so that new markers and keys
// replace the old ones.
// The hash key is this design's way of keeping per-line markers secret, in the
// spirit of the paper's keyed randomiser; its width is a design choice.
module cram_marker_regs
  import cram_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reload,
  input  logic        rng_valid,
  input  logic [31:0] rng_data,
  output logic        rng_ready,
  output logic        ready,
  output marker_t     m2,
  output marker_t     m4,
  output line_t       il,
  output logic [63:0] key
);

  localparam int unsigned NWORDS = 20;

  logic [4:0] idx;
  logic       accept;
  logic       bad_m4;

  assign rng_ready = !ready;
  assign bad_m4    = (rng_data == m2) || (rng_data == ~m2);
  assign accept    = rng_valid && rng_ready && !(idx == 5'd1 && bad_m4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx   <= '0;
      ready <= 1'b0;
      m2    <= '0;
      m4    <= '0;
      il    <= '0;
      key   <= '0;
    end else if (reload) begin
      idx   <= '0;
      ready <= 1'b0;
    end else if (accept) begin
      if (idx == 5'd0) m2 <= rng_data;
      else if (idx == 5'd1) m4 <= rng_data;
      else if (idx < 5'd18) il[(idx-5'd2)*32 +: 32] <= rng_data;
      else key[(idx-5'd18)*32 +: 32] <= rng_data;
      if (idx == 5'(NWORDS-1)) ready <= 1'b1;
      idx <= idx + 5'd1;
    end
  end

endmodule
