// tb_cram_top -- end-to-end test of the CRAM controller at its default sizes.
//
// The test plays the last-level cache: it keeps a golden copy of every line,
// reads lines through the controller, checks every line returned (the
// requested one and any that came packed with it), changes some of them and
// evicts whole groups with the level each line was read at, as a cache with
// ganged eviction would. A behavioural DRAM model sits on the memory port.
// The per-line markers are recomputed here from the random words the test
// feeds at boot, so it can plant marker collisions on purpose.
//
// Directed phases make every mechanism happen; a random phase then mixes
// them with memory back-pressure. Each mechanism is counted and one that
// never happened counts as a failure:
//   4-to-1 and 2-to-1 packing, invalidates, location mispredictions and the
//   three-read worst case, relocation on decompression, inversion on a marker
//   collision and inversion back through the LIT, a complemented-marker line
//   the LIT does not list, a full LIT, memory stalls, Dynamic-CRAM turning a
//   core's compression off and on again, and a group that only the FPC half
//   of the hybrid compressor packs 4-to-1.
// Last, one more colliding line finds the table full: the test checks that
// the controller holds the write, asks for new random words and starts
// re-encoding memory from line 0 (a full 16 GB sweep is not simulated here;
// tb_cram_top_rekey runs one to completion on a small memory).
// The cycle count of every read without back-pressure is checked: per
// memory access one issue cycle, the memory latency, one capture cycle and
// one classify cycle, plus one response cycle.
module tb_cram_top;
  import cram_pkg::*;

  localparam int LAT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rng_valid, rng_ready, init_done;
  logic [31:0] rng_data;
  logic rd_valid, rd_ready;
  laddr_t rd_addr;
  logic [2:0] rd_core;
  logic rsp_valid;
  laddr_t rsp_addr;
  logic [3:0] rsp_mask;
  line_t rsp_lines [4];
  level_e rsp_level;
  logic [2:0] rsp_core;
  logic [1:0] rsp_reads;
  logic ev_valid, ev_ready;
  logic [ADDR_W-3:0] ev_group;
  logic [3:0] ev_present, ev_dirty;
  level_e ev_prior [4];
  line_t ev_lines [4];
  logic [2:0] ev_core;
  logic upf_valid;
  laddr_t upf_addr;
  logic [2:0] upf_core;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  laddr_t mem_req_addr;
  line_t mem_req_data, mem_rsp_data;
  logic lit_overflow, rekey_active;
  logic [4:0] lit_used;
  logic [7:0] comp_enable;
  logic evt_mispredict, evt_comp_write, evt_invalidate, evt_inverted_write,
        evt_inverted_read, evt_relocate;
  logic stall_en = 0;

  cram_top dut (.*);

  cram_mem_model #(.LATENCY(LAT)) mem (
    .clk, .stall_en, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_data(mem_req_data),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ------------------------------------------------------------ markers
  logic [31:0] words [20];
  function automatic logic [31:0] ref_hash(input laddr_t a);
    logic [15:0] l, r, t, f;
    logic [63:0] k;
    k = {words[19], words[18]};
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
  function automatic logic [31:0] m2_of(input laddr_t a); return words[0] ^ ref_hash(a); endfunction

  // ------------------------------------------------------------ event counters
  int n_fpc = 0, n_overflow = 0;
  int n_pack4 = 0, n_pack2 = 0, n_inval = 0, n_mispred = 0, n_three = 0, n_reloc = 0,
      n_invw = 0, n_invr = 0, n_litmiss_cand = 0, n_stall = 0, n_dyn_off = 0, n_dyn_on = 0,
      n_uncomp_when_off = 0;

  always @(posedge clk) begin
    if (evt_comp_write) begin
      if (mem_req_data[511:480] == m2_of(mem_req_addr)) n_pack2++;
      else n_pack4++;
    end
    if (evt_invalidate) n_inval++;
    if (evt_mispredict) n_mispred++;
    if (evt_relocate) n_reloc++;
    if (evt_inverted_write) n_invw++;
    if (evt_inverted_read) n_invr++;
    if (mem_req_valid && !mem_req_ready) n_stall++;
  end

  // ------------------------------------------------------------ golden state
  line_t  gold [laddr_t];
  level_e lvl  [laddr_t];   // level each line was last read at

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom();
    return l;
  endfunction

  // data classes: 0 zero, 1 repeated, 2 small deltas (2-to-1 only), 3 random
  function automatic line_t make_line(input int cls);
    line_t l;
    logic [63:0] b;
    b = {$urandom(), $urandom()};
    case (cls)
      0: l = '0;
      1: l = {8{b}};
      2: begin
           for (int i = 0; i < 8; i++) l[64*i +: 64] = b + 64'(i * 3);
         end
      4: begin                                  // small signed words: FPC packs 16 x 7 bits
           for (int i = 0; i < 16; i++) l[32*i +: 32] = 32'($signed(4'($urandom())));
         end
      default: l = rnd_line();
    endcase
    return l;
  endfunction

  task automatic do_read(input laddr_t a, input logic [2:0] core, output level_e lv, output int reads);
    int t0;
    @(negedge clk);
    rd_valid = 1; rd_addr = a; rd_core = core;
    @(posedge clk);
    while (!rd_ready) @(posedge clk);
    t0 = int'($time / 10);
    @(negedge clk);
    rd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_addr === a && rsp_core === core, "response names the request");
    check(rsp_mask[a[1:0]], "requested line returned");
    for (int i = 0; i < 4; i++) if (rsp_mask[i]) begin
      laddr_t la;
      la = {a[ADDR_W-1:2], 2'(i)};
      if (gold.exists(la))
        check(rsp_lines[i] === gold[la], $sformatf("data of line %h level %0d reads %0d", la, rsp_level, rsp_reads));
      lvl[la] = rsp_level;
    end
    lv = rsp_level;
    reads = int'(rsp_reads);
    if (rsp_reads == 2'd3) n_three++;
    if (!stall_en)
      check(int'($time / 10) - t0 === reads * (LAT + 3) + 1,
            $sformatf("read latency %0d cycles for %0d reads", int'($time / 10) - t0, reads));
    @(negedge clk);   // let the event counters see the response cycle
  endtask

  // read every line of the group that the cache does not hold yet
  task automatic fetch_group(input logic [ADDR_W-3:0] g, input logic [2:0] core, output level_e pl [4]);
    logic [3:0] have;
    level_e lv;
    int r;
    have = '0;
    for (int i = 0; i < 4; i++) begin
      if (!have[i]) begin
        do_read({g, 2'(i)}, core, lv, r);
        for (int j = 0; j < 4; j++) if (rsp_mask[j]) begin
          have[j] = 1'b1;
          pl[j]   = lv;
        end
      end
    end
  endtask

  task automatic evict(input logic [ADDR_W-3:0] g, input logic [3:0] present, input logic [3:0] dirty,
                       input level_e pl [4], input logic [2:0] core);
    @(negedge clk);
    ev_valid = 1; ev_group = g; ev_present = present; ev_dirty = dirty; ev_core = core;
    for (int i = 0; i < 4; i++) begin
      ev_prior[i] = pl[i];
      ev_lines[i] = gold.exists({g, 2'(i)}) ? gold[{g, 2'(i)}] : '0;
    end
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 0;
    while (!rd_ready) @(negedge clk);
  endtask

  // change lines with mask `m` to class `cls` and evict the whole group
  task automatic rewrite(input logic [ADDR_W-3:0] g, input logic [3:0] m, input int cls, input logic [2:0] core);
    level_e pl [4];
    fetch_group(g, core, pl);
    for (int i = 0; i < 4; i++) if (m[i]) gold[{g, 2'(i)}] = make_line(cls);
    evict(g, 4'b1111, m, pl, core);
  endtask

  // groups: sampled ones have group index (addr[12:2]) a multiple of 100
  function automatic logic [ADDR_W-3:0] grp(input int page, input int idx);
    return 28'((page << 11) | idx);
  endfunction

  initial begin
    level_e lv, pl [4];
    int r;
    logic [ADDR_W-3:0] g;
    rng_valid = 0; rng_data = '0; rd_valid = 0; rd_addr = '0; rd_core = '0;
    ev_valid = 0; ev_group = '0; ev_present = '0; ev_dirty = '0; ev_core = '0;
    upf_valid = 0; upf_addr = '0; upf_core = '0;
    for (int i = 0; i < 4; i++) begin ev_prior[i] = LVL_UNCOMP; ev_lines[i] = '0; end
    for (int i = 0; i < 20; i++) words[i] = $urandom();
    if (words[1] == words[0] || words[1] == ~words[0]) words[1] = words[0] ^ 32'h0F0F_0001;
    // memory starts uncompressed with random data
    for (int p = 0; p < 4; p++)
      for (int gi = 0; gi < 16; gi++)
        for (int i = 0; i < 4; i++) begin
          laddr_t a;
          a = {grp(p + 1, gi * 100), 2'(i)};
          gold[a] = rnd_line();
          mem.mem[a] = gold[a];
          a = {grp(p + 1, gi * 100 + 1), 2'(i)};
          gold[a] = rnd_line();
          mem.mem[a] = gold[a];
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- boot: markers
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      rng_valid = 1; rng_data = words[i];
      @(posedge clk);
      while (!rng_ready) @(posedge clk);
    end
    @(negedge clk);
    rng_valid = 0;
    @(negedge clk);
    check(init_done, "markers loaded");

    // ---- 1. plain read of an uncompressed line, correct prediction
    g = grp(1, 1);
    do_read({g, 2'd1}, 0, lv, r);
    check(lv === LVL_UNCOMP && r === 1 && rsp_mask === 4'b0010, "uncompressed read in one access");

    // ---- 2. 4-to-1 packing of a sampled group, then reads that mispredict
    g = grp(1, 0);
    rewrite(g, 4'b1111, 1, 0);
    check(n_pack4 === 1 && n_inval === 3, "4-to-1 write plus three invalidates");
    check(mem.mem[{g, 2'd0}][511:480] === (words[1] ^ ref_hash({g, 2'd0})), "4-to-1 marker in memory");
    do_read({g, 2'd3}, 0, lv, r);
    check(lv === LVL_4TO1 && rsp_mask === 4'b1111, "whole group from one location");
    check(r === 3, "D: own, C, then A");
    // LLP learnt the page: next group of the same page predicted 4-to-1
    do_read({g, 2'd2}, 0, lv, r);
    check(r === 1, "predicted location right after learning");

    // ---- 3. 2-to-1 packing
    g = grp(1, 100);
    rewrite(g, 4'b1111, 2, 0);
    do_read({g, 2'd1}, 0, lv, r);
    check(lv === LVL_2TO1 && rsp_mask === 4'b0011, "pair A+B");
    do_read({g, 2'd3}, 0, lv, r);
    check(lv === LVL_2TO1 && rsp_mask === 4'b1100 && r === 1, "pair C+D predicted");

    // ---- 4. decompression: make a packed group incompressible again
    g = grp(1, 0);
    rewrite(g, 4'b0010, 3, 0);
    check(n_reloc > 0, "lines moved back to their own locations");
    do_read({g, 2'd3}, 0, lv, r);
    check(lv === LVL_2TO1 && r === 3, "C+D repacked 2-to-1 after A, B moved out");

    // ---- 5. marker collision, inversion and the LIT
    g = grp(2, 1);
    fetch_group(g, 0, pl);
    gold[{g, 2'd2}] = rnd_line();
    gold[{g, 2'd2}][511:480] = m2_of({g, 2'd2});
    gold[{g, 2'd3}] = rnd_line();
    gold[{g, 2'd3}][511:480] = ~m2_of({g, 2'd3});    // genuine complement, not listed
    evict(g, 4'b1111, 4'b1100, pl, 0);
    check(n_invw === 1, "colliding line written inverted");
    check(mem.mem[{g, 2'd2}] === ~gold[{g, 2'd2}], "memory holds the inverted line");
    do_read({g, 2'd2}, 0, lv, r);
    check(n_invr === 1, "inverted back on read");
    do_read({g, 2'd3}, 0, lv, r);
    check(n_invr === 1, "unlisted complement read as is");
    n_litmiss_cand++;
    // rewriting the line without collision takes it out of the table
    gold[{g, 2'd2}] = rnd_line();
    pl[2] = LVL_UNCOMP;
    evict(g, 4'b0100, 4'b0100, pl, 0);
    check(mem.mem[{g, 2'd2}] === gold[{g, 2'd2}], "written as is after the collision is gone");
    // sixteen colliding lines fill the table
    for (int k = 0; k < 16; k++) begin
      laddr_t a;
      g = grp(3, 1 + 100 * k);
      a = {g, 2'd1};
      if (!gold.exists(a)) begin gold[a] = rnd_line(); mem.mem[a] = gold[a]; end
      gold[a] = rnd_line();
      gold[a][511:480] = m2_of(a);
      pl[0] = LVL_UNCOMP; pl[1] = LVL_UNCOMP; pl[2] = LVL_UNCOMP; pl[3] = LVL_UNCOMP;
      evict(g, 4'b0010, 4'b0010, pl, 0);
    end
    check(!lit_overflow && !rekey_active, "no overflow at sixteen");
    check(lit_used === 5'd16, "LIT full");
    for (int k = 0; k < 16; k++)
      check(mem.mem[{grp(3, 1 + 100 * k), 2'd1}] === ~gold[{grp(3, 1 + 100 * k), 2'd1}], "listed lines inverted");
    // give core 0 some credit before the counters are exercised
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      upf_valid = 1; upf_addr = {grp(1, 0), 2'd2}; upf_core = 0;
    end
    @(negedge clk);
    upf_valid = 0;

    // ---- 6. Dynamic-CRAM: costs in sampled groups turn core 1 off
    g = grp(4, 0);
    fetch_group(g, 1, pl);
    for (int i = 0; i < 4; i++) gold[{g, 2'(i)}] = make_line(0);
    evict(g, 4'b1111, 4'b1111, pl, 1);
    for (int k = 0; k < 700 && comp_enable[1]; k++) begin
      // clean compressible group, cache believes it was read uncompressed:
      // a clean compressed writeback and three invalidates each time
      pl[0] = LVL_UNCOMP; pl[1] = LVL_UNCOMP; pl[2] = LVL_UNCOMP; pl[3] = LVL_UNCOMP;
      evict(g, 4'b1111, 4'b0000, pl, 1);
    end
    check(!comp_enable[1], "core 1 compression turned off");
    if (!comp_enable[1]) n_dyn_off++;
    check(comp_enable[0], "core 0 unaffected");
    // an unsampled group of core 1 is now written uncompressed
    g = grp(4, 1);
    fetch_group(g, 1, pl);
    for (int i = 0; i < 4; i++) gold[{g, 2'(i)}] = make_line(0);
    r = n_pack4 + n_pack2;
    evict(g, 4'b1111, 4'b1111, pl, 1);
    check(n_pack4 + n_pack2 === r, "no packing while off");
    if (n_pack4 + n_pack2 == r) n_uncomp_when_off++;
    // the same group from core 0 is packed
    fetch_group(g, 0, pl);
    evict(g, 4'b1111, 4'b1111, pl, 0);
    check(n_pack4 + n_pack2 === r + 1, "packed for a core with compression on");
    // useful prefetches in sampled sets turn core 1 back on
    for (int k = 0; k < 5000 && !comp_enable[1]; k++) begin
      @(negedge clk);
      upf_valid = 1; upf_addr = {grp(4, 0), 2'd1}; upf_core = 1;
    end
    @(negedge clk);
    upf_valid = 0;
    @(negedge clk);
    check(comp_enable[1], "core 1 compression back on");
    if (comp_enable[1]) n_dyn_on++;

    // ---- 6b. lines only the FPC half of the compressor packs 4-to-1
    g = grp(2, 1500);
    rewrite(g, 4'b1111, 4, 0);
    check(mem.mem[{g, 2'd0}][7:0] === FPC_ID, "FPC slot stored for line A");
    do_read({g, 2'd3}, 0, lv, r);
    check(lv === LVL_4TO1 && rsp_mask === 4'b1111, "FPC group read back 4-to-1");
    if (lv == LVL_4TO1 && mem.mem[{g, 2'd0}][7:0] == FPC_ID) n_fpc++;

    // ---- 7. random mix with back-pressure
    stall_en = 1;
    for (int k = 0; k < 300; k++) begin
      int p, gi, cls;
      logic [3:0] m;
      p  = 1 + $urandom_range(0, 3);
      gi = $urandom_range(0, 15) * 100 + $urandom_range(0, 1);
      g  = grp(p, gi);
      if (!gold.exists({g, 2'd0})) continue;
      m   = 4'($urandom_range(0, 15));
      cls = $urandom_range(0, 4);
      rewrite(g, m, cls, 3'($urandom_range(0, 7)));
      if ($urandom_range(0, 3) == 0) begin
        do_read({g, 2'($urandom_range(0, 3))}, 0, lv, r);
      end
    end
    stall_en = 0;
    // final sweep: every line still reads back right
    foreach (gold[a]) begin
      if (a[1:0] == 2'd0 || $urandom_range(0, 3) == 0) begin
        do_read(a, 0, lv, r);
      end
    end

    // ---- 8. a seventeenth colliding line: re-key and re-encode starts
    begin
      laddr_t a;
      int n_new, wr0;
      level_e pu [4];
      // the random phase may have taken lines out of the table: refill it
      pu[0] = LVL_UNCOMP; pu[1] = LVL_UNCOMP; pu[2] = LVL_UNCOMP; pu[3] = LVL_UNCOMP;
      for (int k = 0; k < 16 && lit_used != 5'd16; k++) begin
        g = grp(3, 3 + 100 * k);
        a = {g, 2'd1};
        gold[a] = rnd_line();
        gold[a][511:480] = m2_of(a);
        evict(g, 4'b0010, 4'b0010, pu, 0);
      end
      check(lit_used === 5'd16 && !lit_overflow, "table full again");
      g = grp(3, 2);
      a = {g, 2'd1};
      gold[a] = rnd_line();
      gold[a][511:480] = m2_of(a);
      wr0 = mem.n_writes;
      @(negedge clk);
      ev_valid = 1; ev_group = g; ev_present = 4'b0010; ev_dirty = 4'b0010; ev_core = 0;
      for (int i = 0; i < 4; i++) begin ev_prior[i] = LVL_UNCOMP; ev_lines[i] = gold.exists({g, 2'(i)}) ? gold[{g, 2'(i)}] : '0; end
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      @(negedge clk);
      ev_valid = 0;
      for (int k = 0; k < 20 && !rekey_active; k++) @(negedge clk);
      check(rekey_active, "re-key started on overflow");
      check(mem.n_writes === wr0, "colliding write held back");
      @(negedge clk);
      check(!init_done && rng_ready && !rd_ready && !ev_ready, "new words requested, requests refused");
      check(!lit_overflow, "overflow flag cleared when re-keying starts");
      if (rekey_active) n_overflow++;
      n_new = 0;
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        rng_valid = 1; rng_data = $urandom();
        @(posedge clk);
        while (!rng_ready) @(posedge clk);
        n_new++;
      end
      @(negedge clk);
      rng_valid = 0;
      check(n_new === 20 && init_done, "new marker set loaded");
      // the sweep starts at line 0: read then write back each location
      for (int k = 0; k < 200 && mem.n_writes < wr0 + 4; k++) @(negedge clk);
      check(mem.n_writes === wr0 + 4 && rekey_active, "first locations re-encoded");
      check(mem.mem.exists(30'd0) && mem.mem.exists(30'd3), "sweep began at line 0");
    end

    // ---- mechanisms seen
    $display("mechanisms: pack4=%0d pack2=%0d invalidate=%0d mispredict=%0d three_reads=%0d relocate=%0d",
             n_pack4, n_pack2, n_inval, n_mispred, n_three, n_reloc);
    $display("            fpc_group=%0d", n_fpc);
    $display("            inverted_write=%0d inverted_read=%0d lit_miss_candidate=%0d stalls=%0d dyn_off=%0d dyn_on=%0d uncomp_when_off=%0d",
             n_invw, n_invr, n_litmiss_cand, n_stall, n_dyn_off, n_dyn_on, n_uncomp_when_off);
    check(n_pack4 > 0, "4-to-1 packing happened");
    check(n_fpc > 0, "FPC-compressed group happened");
    check(n_pack2 > 0, "2-to-1 packing happened");
    check(n_inval > 0, "invalidates happened");
    check(n_mispred > 0, "mispredictions happened");
    check(n_three > 0, "three-read lookups happened");
    check(n_reloc > 0, "relocations happened");
    check(n_invw > 0, "inverted writes happened");
    check(n_invr > 0, "inverted reads happened");
    check(n_litmiss_cand > 0, "unlisted complement happened");
    check(n_overflow > 0, "LIT overflow happened");
    check(n_stall > 0, "memory stalls happened");
    check(n_dyn_off > 0 && n_dyn_on > 0, "Dynamic-CRAM switched both ways");
    check(n_uncomp_when_off > 0, "uncompressed writeback while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
