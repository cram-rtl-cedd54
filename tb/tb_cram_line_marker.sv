// tb_cram_line_marker -- self-checking test of the per-line marker hash.
//
// A reference four-round Feistel network written here from the block's
// description gives the expected hash; the test checks the three per-line
// markers for random keys and addresses, that the hash is one-to-one over a
// run of neighbouring addresses, and that the per-line 4-byte markers stay
// unequal and non-complementary.
module tb_cram_line_marker;
  import cram_pkg::*;

  marker_t g_m2, g_m4;
  line_t g_il;
  logic [63:0] key;
  laddr_t addr;
  line_markers_t lm;
  int checks = 0, failures = 0;

  cram_line_marker dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s addr=%h", what, addr); end
  endtask

  function automatic logic [31:0] ref_hash(input logic [29:0] a, input logic [63:0] k);
    logic [15:0] l, r, t, f;
    l = {2'b00, a[29:16]};
    r = a[15:0];
    for (int i = 0; i < 4; i++) begin
      t = r ^ k[16*i +: 16];
      f = {t[12:0], t[15:13]} + (r & ~k[16*i +: 16]);
      t = l ^ f;
      l = r;
      r = t;
    end
    return {l, r};
  endfunction

  logic [31:0] seen [256];

  initial begin
    for (int t = 0; t < 200; t++) begin
      g_m2 = $urandom(); g_m4 = $urandom();
      for (int i = 0; i < 16; i++) g_il[32*i +: 32] = $urandom();
      key  = {$urandom(), $urandom()};
      addr = 30'($urandom());
      #1;
      check(lm.m2 === (g_m2 ^ ref_hash(addr, key)), "m2");
      check(lm.m4 === (g_m4 ^ ref_hash(addr, key)), "m4");
      check(lm.il === (g_il ^ {16{ref_hash(addr, key)}}), "il");
      check((lm.m2 ^ lm.m4) === (g_m2 ^ g_m4), "marker pair relation kept");
    end
    // one-to-one over 256 neighbouring lines
    key = {$urandom(), $urandom()};
    g_m2 = '0; g_m4 = '1; g_il = '0;
    for (int i = 0; i < 256; i++) begin
      addr = 30'(i + 1000);
      #1;
      seen[i] = lm.m2;
      for (int j = 0; j < i; j++) if (seen[j] == seen[i]) begin
        failures++; $display("FAIL: hash collision %0d %0d", i, j);
      end
    end
    checks++;
    check(seen[0] !== seen[1], "neighbouring lines differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
