// cram_fpc_comp -- Frequent Pattern Compression of one 64-byte line.
//
// The second half of the hybrid compressor: the line is read as sixteen
// 32-bit words, and each word is replaced by a 3-bit prefix naming its
// pattern plus only the bits the pattern needs. The codes are packed back to
// back, LSB first, into a slot that has the same outer format as a BDI slot:
// byte 0 holds the encoding id 5, the code stream starts at bit 8.
//
//   prefix  pattern                                     data bits
//   000     run of 1..8 zero words (data = run - 1)     3
//   001     4-bit value, sign-extended                  4
//   010     8-bit value, sign-extended                  8
//   011     16-bit value, sign-extended                 16
//   100     upper halfword, lower halfword zero         16
//   101     two halfwords, each an 8-bit value s-ext    16 (hi byte, lo byte)
//   110     one byte repeated four times                8
//   111     uncompressed word                           32
// The prefixes and patterns are those of the published FPC scheme; the zero
// run length limit of 8 and the bit order in the slot are this design's
// choice. Where two patterns match, the shorter one (earlier in the table)
// is used.
//
// `fits2` / `fits4` say whether the stream, id included, fits the 30-byte
// (2-to-1) or 15-byte (4-to-1) slot. When it does not fit, `slot` holds the
// truncated stream and must not be used. Purely combinational.
module cram_fpc_comp
  import cram_pkg::*;
(
  input  line_t line,
  output slot_t slot,
  output logic  fits2,
  output logic  fits4
);

  localparam int unsigned CODE_W   = 35;                      // 3 + 32
  localparam int unsigned STREAM_W = 8 + 16 * CODE_W;         // worst case

  logic [STREAM_W-1:0] stream;
  logic [9:0]          used;    // bits used, id included

  always_comb begin
    int unsigned run, pos;
    stream      = '0;
    stream[7:0] = FPC_ID;
    pos         = 8;
    run         = 0;
    for (int i = 0; i < 16; i++) begin
      logic [31:0]       w;
      logic [CODE_W-1:0] code;
      int unsigned       len, n;
      w    = line[32*i +: 32];
      code = '0;
      len  = 0;
      n    = 1;
      if (run > 0) begin
        run--;                           // absorbed by an earlier zero run
      end else begin
        if (w == '0) begin
          for (int j = i + 1; j < 16; j++)
            if (n == j - i && n < 8 && line[32*j +: 32] == '0) n++;
          run  = n - 1;
          code = CODE_W'({3'(n - 1), 3'b000});
          len  = 6;
        end else if (w == {{28{w[3]}}, w[3:0]}) begin
          code = CODE_W'({w[3:0], 3'b001});
          len  = 7;
        end else if (w == {{24{w[7]}}, w[7:0]}) begin
          code = CODE_W'({w[7:0], 3'b010});
          len  = 11;
        end else if (w == {4{w[7:0]}}) begin
          code = CODE_W'({w[7:0], 3'b110});
          len  = 11;
        end else if (w == {{16{w[15]}}, w[15:0]}) begin
          code = CODE_W'({w[15:0], 3'b011});
          len  = 19;
        end else if (w[15:0] == '0) begin
          code = CODE_W'({w[31:16], 3'b100});
          len  = 19;
        end else if (w[31:16] == {{8{w[23]}}, w[23:16]} && w[15:0] == {{8{w[7]}}, w[7:0]}) begin
          code = CODE_W'({w[23:16], w[7:0], 3'b101});
          len  = 19;
        end else begin
          code = {w, 3'b111};
          len  = 35;
        end
        stream[pos +: CODE_W] = stream[pos +: CODE_W] | code;
        pos = pos + len;
      end
    end
    used = 10'(pos);
  end

  assign slot  = stream[SLOT_BITS-1:0];
  assign fits2 = used <= 10'(SLOT2_BYTES * 8);
  assign fits4 = used <= 10'(SLOT4_BYTES * 8);

endmodule
