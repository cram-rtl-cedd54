// tb_cram_marker_regs -- self-checking test of the boot-time marker registers.
//
// Feeds random words from a model generator, including a 4-to-1 candidate
// equal to the 2-to-1 marker and one equal to its complement, both of which
// must be refused, then checks every register against the words accepted and
// that `ready` rises exactly after the twentieth accepted word. A `reload`
// must then drop `ready` and take a second set of twenty words.
module tb_cram_marker_regs;
  import cram_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rng_valid, reload;
  logic [31:0] rng_data;
  logic rng_ready, ready;
  marker_t m2, m4;
  line_t il;
  logic [63:0] key;
  int checks = 0, failures = 0;

  cram_marker_regs dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] words [20];
  int cycles;

  initial begin
    rng_valid = 0; rng_data = '0; reload = 0;
    for (int i = 0; i < 20; i++) words[i] = $urandom();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!ready && rng_ready, "not ready after reset");
    // word 0
    rng_valid = 1; rng_data = words[0];
    @(negedge clk);
    // two bad 4-to-1 candidates
    rng_data = words[0];
    @(negedge clk);
    check(rng_ready && !ready, "equal marker refused");
    rng_data = ~words[0];
    @(negedge clk);
    check(rng_ready && !ready, "complement marker refused");
    cycles = 0;
    for (int i = 1; i < 20; i++) begin
      rng_data = words[i];
      @(negedge clk);
      cycles++;
      if (i < 19) check(!ready, "ready too early");
    end
    rng_valid = 0;
    check(ready && !rng_ready, "ready after 20 words");
    check(cycles === 19, "one word per cycle");
    check(m2 === words[0], "m2");
    check(m4 === words[1], "m4");
    for (int i = 0; i < 16; i++) check(il[32*i +: 32] === words[2+i], "il word");
    check(key === {words[19], words[18]}, "key");
    // further words are ignored
    rng_valid = 1; rng_data = ~words[0];
    @(negedge clk);
    check(m2 === words[0] && ready, "registers stay fixed");
    rng_valid = 0;
    reload = 1;
    @(negedge clk);
    reload = 0;
    check(!ready && rng_ready, "reload drops ready");
    for (int i = 0; i < 20; i++) words[i] = $urandom();
    if (words[1] == words[0] || words[1] == ~words[0]) words[1] = words[1] ^ 32'h1;
    rng_valid = 1;
    for (int i = 0; i < 20; i++) begin
      rng_data = words[i];
      @(negedge clk);
    end
    rng_valid = 0;
    check(ready, "ready after second set");
    check(m2 === words[0] && m4 === words[1], "new markers");
    for (int i = 0; i < 16; i++) check(il[32*i +: 32] === words[2+i], "new il word");
    check(key === {words[19], words[18]}, "new key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
