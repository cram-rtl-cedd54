// tb_cram_dyn -- self-checking test of Dynamic-CRAM.
//
// Checks which groups are sampled (group index within the set index a
// multiple of 100), that events outside the sample are ignored, that each
// core's counter starts at the midpoint with compression on, follows
// +1/-n events, saturates at 0 and 4095, and that the enable bit is the
// counter's top bit. A counter model in the test gives the expected values.
module tb_cram_dyn;
  import cram_pkg::*;

  logic clk = 0, rst_n = 0;
  laddr_t op_addr, ben_addr;
  logic op_sampled, ben_valid, cost_valid;
  logic [2:0] ben_core, cost_core, cost_cnt;
  logic [7:0] enable;
  logic [11:0] counter [8];
  int checks = 0, failures = 0;
  int model [8];

  cram_dyn dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam laddr_t SAMP   = 30'h2A000 | (30'd100 << 2);  // group 100 of the set index
  localparam laddr_t NOSAMP = 30'h2A000 | (30'd101 << 2);

  task automatic step(input bit b, input int bc, input bit c, input int cc, input int n, input laddr_t a);
    @(negedge clk);
    ben_valid = b; ben_core = 3'(bc); ben_addr = a;
    cost_valid = c; cost_core = 3'(cc); cost_cnt = 3'(n); op_addr = a;
    @(negedge clk);
    ben_valid = 0; cost_valid = 0;
    if (a[12:2] % 100 == 0) begin
      if (b) model[bc] += 1;
      if (c) model[cc] -= n;
      for (int i = 0; i < 8; i++) begin
        if (model[i] < 0) model[i] = 0;
        if (model[i] > 4095) model[i] = 4095;
      end
    end
  endtask

  task automatic compare(input string what);
    for (int i = 0; i < 8; i++) begin
      check(int'(counter[i]) === model[i], what);
      check(enable[i] === (model[i] >= 2048), "enable is MSB");
    end
  endtask

  initial begin
    ben_valid = 0; cost_valid = 0; ben_core = 0; cost_core = 0; cost_cnt = 1;
    op_addr = '0; ben_addr = '0;
    for (int i = 0; i < 8; i++) model[i] = 2048;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // sampling
    for (int g = 0; g < 2048; g++) begin
      op_addr = (30'h3 << 13) | (30'(g) << 2) | 30'(g % 4); #1;
      check(op_sampled === (g % 100 === 0), "sampled groups");
    end
    compare("reset value");
    // core 2 loses: 5 cost events of 1 in the sample, others ignored
    for (int i = 0; i < 5; i++) step(0, 0, 1, 2, 1, SAMP);
    step(0, 0, 1, 2, 7, NOSAMP);
    step(1, 2, 0, 0, 0, NOSAMP);
    compare("sampled costs only");
    check(!enable[2], "core 2 disabled below midpoint");
    check(enable[3], "core 3 still enabled");
    // benefit and cost together
    step(1, 2, 1, 2, 3, SAMP);
    compare("benefit and cost in one cycle");
    // saturate core 4 at the top and core 5 at zero
    for (int i = 0; i < 2100; i++) step(1, 4, 1, 5, 1, SAMP);
    compare("saturation");
    check(counter[4] === 12'd4095 && counter[5] === 12'd0, "limits");
    for (int i = 0; i < 3; i++) step(1, 5, 0, 0, 0, SAMP);
    compare("recovers from zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
