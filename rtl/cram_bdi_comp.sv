// cram_bdi_comp -- Base-Delta-Immediate compressor for one 64-byte line.
//
// CRAM packs two lines into 60 bytes (2-to-1) or four lines into 60 bytes
// (4-to-1); the last four bytes hold the marker. The paper's compressor is a
// hybrid of FPC and BDI that keeps whichever output is smaller, with the
// algorithm id and its metadata (e.g. the BDI base) counted in the compressed
// size. This block is the BDI half (cram_fpc_comp is the other; the top
// keeps whichever fits the smaller space). Every line gets a fixed slot:
// 30 bytes in a 2-to-1 line and 15 bytes in a 4-to-1 line. Fixed slots
// instead of a packed variable-length stream are a simplification of this
// design: a pair is stored only if each line fits 30 bytes, a group only if
// each line fits 15 bytes.
//
// Slot format (byte 0 = encoding id, then the payload, unused bytes zero):
//   id 0  ZEROS  all zero                               1 byte
//   id 1  REP8   one 8-byte value repeated 8 times      1+8 bytes
//   id 2  B8D1   8-byte base, 8 signed 1-byte deltas    1+8+8 bytes
//   id 3  B4D1   4-byte base, 16 signed 1-byte deltas   1+4+16 bytes
//   id 4  B8D2   8-byte base, 8 signed 2-byte deltas    1+8+16 bytes
// The base is the line's first word; the smallest fitting encoding is chosen.
// Larger BDI encodings cannot fit a 30-byte slot and are left out.
//
// Purely combinational. `fits2` / `fits4` compare the encoded size with
// SLOT2_BYTES / SLOT4_BYTES. The largest encoding is 25 bytes, so the top
// five bytes of `slot` are always zero (lint reports them as constant).
module cram_bdi_comp
  import cram_pkg::*;
(
  input  line_t line,
  output slot_t slot,
  output logic  fits2,
  output logic  fits4
);

  logic [63:0] w8 [8];
  logic [31:0] w4 [16];
  logic zeros, rep8, b8d1, b4d1, b8d2;
  int unsigned size;   // encoded bytes, id included

  always_comb begin
    for (int i = 0; i < 8; i++)  w8[i] = line[64*i +: 64];
    for (int i = 0; i < 16; i++) w4[i] = line[32*i +: 32];
    zeros = (line == '0);
    rep8  = 1'b1;
    b8d1  = 1'b1;
    b8d2  = 1'b1;
    b4d1  = 1'b1;
    for (int i = 0; i < 8; i++) begin
      logic [63:0] d;
      d = w8[i] - w8[0];
      if (w8[i] != w8[0]) rep8 = 1'b0;
      if (d != {{56{d[7]}},  d[7:0]})  b8d1 = 1'b0;
      if (d != {{48{d[15]}}, d[15:0]}) b8d2 = 1'b0;
    end
    for (int i = 0; i < 16; i++) begin
      logic [31:0] d;
      d = w4[i] - w4[0];
      if (d != {{24{d[7]}}, d[7:0]}) b4d1 = 1'b0;
    end
  end

  always_comb begin
    slot = '0;
    size = 1 + 64;
    if (zeros) begin
      slot[7:0] = 8'd0;
      size      = 1;
    end else if (rep8) begin
      slot[7:0]  = 8'd1;
      slot[71:8] = w8[0];
      size       = 1 + 8;
    end else if (b8d1) begin
      slot[7:0]  = 8'd2;
      slot[71:8] = w8[0];
      for (int i = 0; i < 8; i++) slot[72 + 8*i +: 8] = 8'(w8[i] - w8[0]);
      size = 1 + 8 + 8;
    end else if (b4d1) begin
      slot[7:0]  = 8'd3;
      slot[39:8] = w4[0];
      for (int i = 0; i < 16; i++) slot[40 + 8*i +: 8] = 8'(w4[i] - w4[0]);
      size = 1 + 4 + 16;
    end else if (b8d2) begin
      slot[7:0]  = 8'd4;
      slot[71:8] = w8[0];
      for (int i = 0; i < 8; i++) slot[72 + 16*i +: 16] = 16'(w8[i] - w8[0]);
      size = 1 + 8 + 16;
    end else begin
      slot[7:0] = 8'hFF;
    end
    fits2 = (size <= SLOT2_BYTES);
    fits4 = (size <= SLOT4_BYTES);
  end

endmodule
