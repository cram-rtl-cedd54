// tb_cram_llp -- self-checking test of the Line Location Predictor.
//
// Checks the restricted placement (A always in its own location; B in A's
// when compressed; C in A's for 4-to-1; D in its own, C's or A's), that the
// table starts at "uncompressed", learns the last level per page, that lines
// of one page share an entry, and that a different page is not disturbed.
module tb_cram_llp;
  import cram_pkg::*;

  logic clk = 0, rst_n = 0;
  laddr_t pred_addr, upd_addr, pred_loc;
  level_e pred_level, upd_level;
  logic upd_valid;
  int checks = 0, failures = 0;

  cram_llp dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s addr=%h", what, pred_addr); end
  endtask

  task automatic learn(input laddr_t a, input level_e l);
    @(negedge clk);
    upd_valid = 1; upd_addr = a; upd_level = l;
    @(negedge clk);
    upd_valid = 0;
  endtask

  function automatic laddr_t expect_loc(input laddr_t a, input level_e l);
    laddr_t g;
    g = a & ~30'd3;
    if (a[1:0] == 0) return a;
    if (l == LVL_4TO1) return g;
    if (l == LVL_2TO1) return (a[1] ? g + 30'd2 : g);
    return a;
  endfunction

  initial begin
    laddr_t page, other;
    upd_valid = 0; upd_addr = '0; upd_level = LVL_UNCOMP; pred_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    page  = 30'h1234_5 << 6;
    other = page + 30'd64;     // next page
    for (int o = 0; o < 64; o++) begin
      pred_addr = page + 30'(o); #1;
      check(pred_level === LVL_UNCOMP && pred_loc === pred_addr, "reset: uncompressed, own location");
    end
    learn(page + 30'd5, LVL_4TO1);
    for (int o = 0; o < 64; o++) begin
      pred_addr = page + 30'(o); #1;
      check(pred_loc === expect_loc(pred_addr, LVL_4TO1), "4-to-1 location");
      if (o % 4 != 0) check(pred_level === LVL_4TO1, "4-to-1 level");
    end
    pred_addr = other + 30'd1; #1;
    check(pred_level === LVL_UNCOMP, "other page untouched");
    learn(page + 30'd40, LVL_2TO1);
    for (int o = 0; o < 64; o++) begin
      pred_addr = page + 30'(o); #1;
      check(pred_loc === expect_loc(pred_addr, LVL_2TO1), "2-to-1 location");
    end
    pred_addr = page + 30'd7; #1;
    check(pred_loc === page + 30'd6, "D of a 2-to-1 pair is read from C");
    learn(page, LVL_UNCOMP);
    pred_addr = page + 30'd3; #1;
    check(pred_loc === page + 30'd3, "back to own location");
    // every entry can hold a level: walk 512 consecutive pages
    for (int p = 0; p < 512; p++) learn(30'(p) << 6, level_e'(p % 3));
    for (int p = 0; p < 512; p++) begin
      pred_addr = (30'(p) << 6) + 30'd1; #1;
      check(pred_level === level_e'(p % 3), "512 entries");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
