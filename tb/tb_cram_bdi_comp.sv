// tb_cram_bdi_comp -- self-checking test of the BDI compressor.
//
// Generates lines of each class (zero, one repeated 8-byte word, 8-byte
// words within +-127 of the first, 4-byte words within +-127, 8-byte words
// within +-32767, random) and checks the chosen encoding id, the 15/30-byte
// fit flags, that bytes past the encoding's size are zero, and that a
// decoder written here from the slot format rebuilds the line.
module tb_cram_bdi_comp;
  import cram_pkg::*;

  line_t line;
  slot_t slot;
  logic fits2, fits4;
  int checks = 0, failures = 0;

  cram_bdi_comp dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t ref_decode(input slot_t s);
    line_t l;
    logic [63:0] b8;
    logic [31:0] b4;
    l  = '0;
    b8 = s[71:8];
    b4 = s[39:8];
    case (s[7:0])
      1: for (int i = 0; i < 8; i++) l[64*i +: 64] = b8;
      2: for (int i = 0; i < 8; i++) l[64*i +: 64] = b8 + 64'(signed'(s[72+8*i +: 8]));
      3: for (int i = 0; i < 16; i++) l[32*i +: 32] = b4 + 32'(signed'(s[40+8*i +: 8]));
      4: for (int i = 0; i < 8; i++) l[64*i +: 64] = b8 + 64'(signed'(s[72+16*i +: 16]));
      default: l = '0;
    endcase
    return l;
  endfunction

  task automatic run(input int cls, input int exp_id, input int size);
    logic [63:0] b8;
    logic [31:0] b4;
    b8 = {$urandom(), $urandom()};
    b4 = $urandom();
    case (cls)
      0: line = '0;
      1: for (int i = 0; i < 8; i++) line[64*i +: 64] = b8;
      2: begin
           for (int i = 0; i < 8; i++) line[64*i +: 64] = b8 + 64'(signed'(8'($urandom())));
           line[63:0] = b8;
           line[127:64] = b8 + 64'd3;     // not repeated
         end
      3: begin
           for (int i = 0; i < 16; i++) line[32*i +: 32] = b4 + 32'(signed'(8'($urandom())));
           line[31:0]  = b4;
           line[63:32] = b4 + 32'd1;     // high halves of 8-byte words 0 and 1
           line[127:96] = b4 + 32'd50;   // differ by 49: no 8-byte base fits
         end
      4: begin
           for (int i = 0; i < 8; i++) line[64*i +: 64] = b8 + 64'(signed'(16'($urandom())));
           line[63:0]   = b8;
           line[127:64] = b8 + 64'd20000;   // too far for 1-byte deltas
         end
      default: for (int i = 0; i < 16; i++) line[32*i +: 32] = $urandom();
    endcase
    #1;
    checks++;
    if (slot[7:0] != 8'(exp_id)) begin
      failures++;
      $display("FAIL: class %0d id %0d expected %0d", cls, slot[7:0], exp_id);
    end
    check(fits4 === (size <= 15), "fits4");
    check(fits2 === (size <= 30), "fits2");
    if (size <= 30) begin
      check(ref_decode(slot) === line, "round trip");
      check((slot >> (8 * size)) === '0, "unused bytes zero");
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      run(0, 0, 1);
      run(1, 1, 9);
      run(2, 2, 17);
      run(3, 3, 21);
      run(4, 4, 25);
      run(5, 255, 64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
