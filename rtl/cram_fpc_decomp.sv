// cram_fpc_decomp -- expands a Frequent Pattern Compression slot.
//
// Inverse of cram_fpc_comp (see there for the code table): walks the code
// stream from bit 8 of the slot, one code per step, and rebuilds the sixteen
// 32-bit words of the line. A zero run advances the word index by the run
// length; the words it covers stay zero. A 15-byte slot of a 4-to-1 line is
// passed in zero-extended to 30 bytes; a stream that runs past the slot reads
// zeros, which the compressor never produces. The id byte is not checked:
// the caller selects this decompressor for id 5.
//
// Purely combinational: a chain of sixteen variable shifts of the stream.
module cram_fpc_decomp
  import cram_pkg::*;
(
  input  slot_t slot,
  output line_t line
);

  localparam int unsigned CODE_W = 35;

  logic [SLOT_BITS+CODE_W-1:0] s;
  assign s = {{CODE_W{1'b0}}, slot};

  always_comb begin
    int unsigned pos, w;
    line = '0;
    pos  = 8;
    w    = 0;
    for (int step = 0; step < 16; step++) begin
      logic [CODE_W-1:0] c;
      logic [31:0]       v;
      int unsigned       len, adv;
      c   = s[pos +: CODE_W];
      adv = 1;
      unique case (c[2:0])
        3'b000: begin v = '0; len = 6; adv = int'(c[5:3]) + 1; end
        3'b001: begin v = {{28{c[6]}}, c[6:3]};   len = 7;  end
        3'b010: begin v = {{24{c[10]}}, c[10:3]}; len = 11; end
        3'b011: begin v = {{16{c[18]}}, c[18:3]}; len = 19; end
        3'b100: begin v = {c[18:3], 16'h0000};    len = 19; end
        3'b101: begin v = {{8{c[18]}}, c[18:11], {8{c[10]}}, c[10:3]}; len = 19; end
        3'b110: begin v = {4{c[10:3]}};           len = 11; end
        default: begin v = c[34:3];               len = 35; end
      endcase
      if (w < 16) line[32*w[3:0] +: 32] = v;
      w   = w + adv;
      if (pos + len <= SLOT_BITS) pos = pos + len;
      else pos = SLOT_BITS;
    end
  end

endmodule
