// cram_line_marker -- per-line markers of one memory location.
//
// The paper makes the markers private to each line by hashing the global
// markers with the line address, so that a program writing the same value
// everywhere cannot collide with the marker on many lines, and suggests a
// keyed static randomiser such as a Feistel network. This block does that:
// the line address (zero-extended to 32 bits) goes through a four-round
// Feistel network on 16-bit halves with the four 16-bit round keys of `key`,
// and the 32-bit result h is XORed into both 4-byte markers and, replicated
// sixteen times, into Marker-IL. XORing the same h into both 4-byte markers
// keeps them unequal and non-complementary per line when the global ones are.
// The round function F(r,k) = rotl3(r ^ k) + (r & ~k) is this design's
// choice; any F gives a one-to-one network.
//
// Purely combinational.
module cram_line_marker
  import cram_pkg::*;
(
  input  marker_t       g_m2,
  input  marker_t       g_m4,
  input  line_t         g_il,
  input  logic [63:0]   key,
  input  laddr_t        addr,
  output line_markers_t lm
);

  function automatic logic [15:0] round_f(input logic [15:0] r, input logic [15:0] k);
    logic [15:0] t;
    t = r ^ k;
    return {t[12:0], t[15:13]} + (r & ~k);
  endfunction

  logic [31:0] h;

  always_comb begin
    logic [15:0] l, r, nl;
    l = 16'(addr[ADDR_W-1:16]);
    r = addr[15:0];
    for (int i = 0; i < 4; i++) begin
      nl = r;
      r  = l ^ round_f(r, key[16*i +: 16]);
      l  = nl;
    end
    h = {l, r};
  end

  assign lm.m2 = g_m2 ^ h;
  assign lm.m4 = g_m4 ^ h;
  assign lm.il = g_il ^ {16{h}};

endmodule
