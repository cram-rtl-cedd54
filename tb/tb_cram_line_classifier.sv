// tb_cram_line_classifier -- self-checking test of the marker check on reads.
//
// Builds lines ending in the 2-to-1 marker, the 4-to-1 marker, their
// complements, whole-line Marker-IL and its complement, and plain random
// data, and checks the status reported for each.
module tb_cram_line_classifier;
  import cram_pkg::*;

  line_t data;
  line_markers_t lm;
  rd_status_e status;
  int checks = 0, failures = 0;

  cram_line_classifier dut (.*);

  task automatic expect_st(input rd_status_e e, input string what);
    #1;
    checks++;
    if (status !== e) begin
      failures++;
      $display("FAIL: %s got %s expected %s", what, status.name(), e.name());
    end
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom();
    return l;
  endfunction

  initial begin
    for (int t = 0; t < 100; t++) begin
      lm.m2 = $urandom();
      do lm.m4 = $urandom(); while (lm.m4 == lm.m2 || lm.m4 == ~lm.m2);
      lm.il = rnd_line();
      data = rnd_line(); data[511:480] = lm.m2;  expect_st(ST_2TO1, "2-to-1");
      data = rnd_line(); data[511:480] = lm.m4;  expect_st(ST_4TO1, "4-to-1");
      data = lm.il;                              expect_st(ST_INVALID, "invalid");
      data = rnd_line(); data[511:480] = ~lm.m2; expect_st(ST_INV_CAND, "~m2");
      data = rnd_line(); data[511:480] = ~lm.m4; expect_st(ST_INV_CAND, "~m4");
      data = ~lm.il;                             expect_st(ST_INV_CAND, "~il");
      data = rnd_line();
      if (data[511:480] == lm.m2 || data[511:480] == lm.m4) data[511:480] = lm.m2 ^ lm.m4 ^ 32'h1;
      expect_st(ST_UNCOMP, "plain");
      // marker in the first four bytes only is not a marker
      data = rnd_line(); data[31:0] = lm.m2; data[511:480] = lm.m2 + 32'd7;
      if (data[511:480] == lm.m4 || data[511:480] == ~lm.m4 || data[511:480] == ~lm.m2) data[511:480] = 32'h0;
      if (data[511:480] == lm.m4 || data[511:480] == ~lm.m4 || data[511:480] == ~lm.m2) data[511:480] = 32'h1;
      expect_st(ST_UNCOMP, "marker not in last bytes");
    end
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
