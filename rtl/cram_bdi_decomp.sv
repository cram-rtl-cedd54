// cram_bdi_decomp -- Base-Delta-Immediate decompressor for one slot.
//
// Inverse of cram_bdi_comp: reads the encoding id in byte 0 of a 30-byte slot
// and rebuilds the 64-byte line (each word = base + sign-extended delta).
// A 15-byte slot of a 4-to-1 line is passed in zero-extended to 30 bytes.
// An unknown id gives an all-zero line; the writer never produces one.
//
// Slot format: see cram_bdi_comp. Purely combinational.
module cram_bdi_decomp
  import cram_pkg::*;
(
  input  slot_t slot,
  output line_t line
);

  logic [63:0] base8;
  logic [31:0] base4;

  assign base8 = slot[71:8];
  assign base4 = slot[39:8];

  always_comb begin
    line = '0;
    unique case (slot[7:0])
      8'd1: for (int i = 0; i < 8; i++) line[64*i +: 64] = base8;
      8'd2: for (int i = 0; i < 8; i++)
              line[64*i +: 64] = base8 + {{56{slot[72+8*i+7]}}, slot[72+8*i +: 8]};
      8'd3: for (int i = 0; i < 16; i++)
              line[32*i +: 32] = base4 + {{24{slot[40+8*i+7]}}, slot[40+8*i +: 8]};
      8'd4: for (int i = 0; i < 8; i++)
              line[64*i +: 64] = base8 + {{48{slot[72+16*i+15]}}, slot[72+16*i +: 16]};
      default: line = '0;
    endcase
  end

endmodule
