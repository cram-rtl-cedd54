// tb_cram_lit -- self-checking test of the Line Inversion Table.
//
// Fills the 16 entries with random line addresses, checks lookups of listed
// and unlisted addresses, that a duplicate insert takes no entry, that a
// seventeenth insert raises the sticky overflow, and that removal frees an
// entry for reuse, and that `clear` drops the flag but keeps the entries.
// Expected contents come from a queue kept by the test.
module tb_cram_lit;
  import cram_pkg::*;

  logic clk = 0, rst_n = 0;
  laddr_t lookup_addr, upd_addr;
  logic lookup_hit, upd_valid, upd_insert, overflow, clear;
  logic [4:0] count;
  int checks = 0, failures = 0;

  cram_lit dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic upd(input bit ins, input laddr_t a);
    @(negedge clk);
    upd_valid = 1; upd_insert = ins; upd_addr = a;
    @(negedge clk);
    upd_valid = 0;
  endtask

  task automatic lk(input laddr_t a, input bit exp, input string what);
    lookup_addr = a;
    #1;
    check(lookup_hit === exp, what);
  endtask

  laddr_t addrs [17];

  initial begin
    upd_valid = 0; upd_insert = 0; clear = 0; upd_addr = '0; lookup_addr = '0;
    for (int i = 0; i < 17; i++) addrs[i] = 30'($urandom()) | 30'(i);  // distinct enough
    for (int i = 1; i < 17; i++) for (int j = 0; j < i; j++) if (addrs[i] == addrs[j]) addrs[i] = addrs[i] + 30'd977;
    repeat (2) @(posedge clk);
    rst_n = 1;
    lk(addrs[0], 0, "empty after reset");
    check(count === 0, "count zero after reset");
    for (int i = 0; i < 16; i++) begin
      upd(1, addrs[i]);
      check(count === 5'(i + 1), "count grows");
    end
    for (int i = 0; i < 16; i++) lk(addrs[i], 1, "listed address hits");
    lk(addrs[16], 0, "unlisted address misses");
    check(!overflow, "no overflow at 16");
    upd(1, addrs[3]);
    check(count === 16 && !overflow, "duplicate insert takes nothing");
    upd(1, addrs[16]);
    check(overflow, "overflow on 17th");
    lk(addrs[16], 0, "overflowing address not stored");
    upd(0, addrs[5]);
    lk(addrs[5], 0, "removed");
    check(count === 15, "count after remove");
    upd(0, addrs[16]);
    check(count === 15, "removing an absent address changes nothing");
    upd(1, addrs[16]);
    lk(addrs[16], 1, "freed entry reused");
    check(count === 16, "count after reuse");
    check(overflow, "overflow is sticky");
    for (int i = 0; i < 16; i++) if (i != 5) lk(addrs[i], 1, "others kept");
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    check(!overflow, "clear drops overflow");
    check(count === 16, "clear keeps entries");
    upd(1, addrs[5]);
    check(overflow, "overflow rises again after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
