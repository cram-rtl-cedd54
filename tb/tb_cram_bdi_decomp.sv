// tb_cram_bdi_decomp -- self-checking test of the BDI decompressor.
//
// Builds slots by hand for every encoding id from random bases and deltas,
// works out the expected 64-byte line word by word, and compares. Also checks
// that a 15-byte slot zero-extended to 30 bytes decodes the same way and that
// an unknown id gives zero.
module tb_cram_bdi_decomp;
  import cram_pkg::*;

  slot_t slot;
  line_t line;
  int checks = 0, failures = 0;

  cram_bdi_decomp dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    line_t exp;
    logic [63:0] b8;
    logic [31:0] b4;
    for (int t = 0; t < 300; t++) begin
      b8 = {$urandom(), $urandom()};
      b4 = $urandom();
      slot = '0; #1;
      check(line === '0, "zeros");
      slot = '0; slot[7:0] = 1; slot[71:8] = b8; #1;
      exp = {8{b8}};
      check(line === exp, "rep8");
      slot = slot_t'(slot[119:0]); #1;
      check(line === exp, "rep8 in a 15-byte slot");
      slot = '0; slot[7:0] = 2; slot[71:8] = b8;
      for (int i = 0; i < 8; i++) begin
        logic signed [7:0] d;
        d = 8'($urandom());
        slot[72+8*i +: 8] = d;
        exp[64*i +: 64] = b8 + 64'(d);
      end
      #1; check(line === exp, "b8d1");
      slot = '0; slot[7:0] = 3; slot[39:8] = b4;
      for (int i = 0; i < 16; i++) begin
        logic signed [7:0] d;
        d = 8'($urandom());
        slot[40+8*i +: 8] = d;
        exp[32*i +: 32] = b4 + 32'(d);
      end
      #1; check(line === exp, "b4d1");
      slot = '0; slot[7:0] = 4; slot[71:8] = b8;
      for (int i = 0; i < 8; i++) begin
        logic signed [15:0] d;
        d = 16'($urandom());
        slot[72+16*i +: 16] = d;
        exp[64*i +: 64] = b8 + 64'(d);
      end
      #1; check(line === exp, "b8d2");
      slot = '1; slot[7:0] = 8'hFF; #1;
      check(line === '0, "unknown id");
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
