// tb_cram_top_rekey -- LIT overflow recovery of cram_top on a small memory.
//
// The controller is built with MEM_LINES = 8192 so that a whole re-encoding
// sweep fits in a simulation. The test plays the last-level cache as in
// tb_cram_top (golden copy of every line, ganged evictions with the level
// each line was read at) and a behavioural DRAM model sits on the memory
// port; it picks both the boot-time random words and the words of the
// second marker set, so it can compute the per-line markers of both.
//
//   1. Random groups are written 4-to-1, 2-to-1 and uncompressed, leaving
//      invalid-line markers behind, and one line is planted whose tail equals
//      the 2-to-1 marker of the *second* set (harmless until the re-key).
//   2. Sixteen colliding lines fill the table; a seventeenth (which also has
//      clean, unchanged lines in its group) makes the controller hold the
//      write and start re-keying. The test feeds twenty new words, with
//      memory back-pressure, and waits for the sweep to end.
//   3. Afterwards: every packed location carries the new marker and no
//      other location still holds an old marker; the lines that were listed are
//      stored plainly and left the table; the planted line is now stored
//      inverted and is the one entry in the table; the held line was written
//      plainly after the sweep (it does not collide with the new set); and
//      every line reads back right through the controller.
module tb_cram_top_rekey;
  import cram_pkg::*;

  localparam int LAT       = 4;
  localparam int MEM_LINES = 8192;
  localparam int GROUPS    = MEM_LINES / 4;

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

  cram_top #(.MEM_LINES(MEM_LINES)) dut (.*);

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
  logic [31:0] w_old [20], w_new [20];

  function automatic logic [31:0] ref_hash(input logic [63:0] k, input laddr_t a);
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

  // marker `which` (0: 2-to-1, 1: 4-to-1) of line `a` in word set `w`
  function automatic logic [31:0] mk(input logic [31:0] w [20], input int which, input laddr_t a);
    return w[which] ^ ref_hash({w[19], w[18]}, a);
  endfunction

  function automatic line_t il_of(input logic [31:0] w [20], input laddr_t a);
    line_t l;
    logic [31:0] h;
    h = ref_hash({w[19], w[18]}, a);
    for (int i = 0; i < 16; i++) l[32*i +: 32] = w[2+i] ^ h;
    return l;
  endfunction

  // ------------------------------------------------------------ golden state
  line_t  gold [laddr_t];

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom();
    return l;
  endfunction

  function automatic line_t make_line(input int cls);
    line_t l;
    logic [63:0] b;
    b = {$urandom(), $urandom()};
    case (cls)
      0: l = '0;
      1: l = {8{b}};
      2: for (int i = 0; i < 8; i++) l[64*i +: 64] = b + 64'(i * 3);
      default: l = rnd_line();
    endcase
    return l;
  endfunction

  task automatic do_read(input laddr_t a, output level_e lv, output logic [3:0] m);
    @(negedge clk);
    rd_valid = 1; rd_addr = a; rd_core = 0;
    @(posedge clk);
    while (!rd_ready) @(posedge clk);
    @(negedge clk);
    rd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_addr === a && rsp_mask[a[1:0]], "requested line returned");
    for (int i = 0; i < 4; i++) if (rsp_mask[i]) begin
      laddr_t la;
      la = {a[ADDR_W-1:2], 2'(i)};
      if (gold.exists(la))
        check(rsp_lines[i] === gold[la], $sformatf("data of line %h level %0d", la, rsp_level));
      else
        check(rsp_lines[i] === '0, $sformatf("untouched line %h reads zero", la));
    end
    lv = rsp_level;
    m  = rsp_mask;
    @(negedge clk);
  endtask

  task automatic fetch_group(input logic [ADDR_W-3:0] g, output level_e pl [4]);
    logic [3:0] have, m;
    level_e lv;
    have = '0;
    for (int i = 0; i < 4; i++) begin
      if (!have[i]) begin
        do_read({g, 2'(i)}, lv, m);
        for (int j = 0; j < 4; j++) if (m[j]) begin
          have[j] = 1'b1;
          pl[j]   = lv;
        end
      end
    end
  endtask

  task automatic start_evict(input logic [ADDR_W-3:0] g, input logic [3:0] dirty, input level_e pl [4]);
    @(negedge clk);
    ev_valid = 1; ev_group = g; ev_present = 4'b1111; ev_dirty = dirty; ev_core = 0;
    for (int i = 0; i < 4; i++) begin
      ev_prior[i] = pl[i];
      ev_lines[i] = gold.exists({g, 2'(i)}) ? gold[{g, 2'(i)}] : '0;
    end
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 0;
  endtask

  task automatic evict(input logic [ADDR_W-3:0] g, input logic [3:0] dirty, input level_e pl [4]);
    start_evict(g, dirty, pl);
    while (!rd_ready) @(negedge clk);
  endtask

  task automatic load_words(input logic [31:0] w [20]);
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      rng_valid = 1; rng_data = w[i];
      @(posedge clk);
      while (!rng_ready) @(posedge clk);
    end
    @(negedge clk);
    rng_valid = 0;
  endtask

  // a random line whose tail is the 2-to-1 marker of set `w` at its address
  function automatic line_t collider(input logic [31:0] w [20], input laddr_t a);
    line_t l;
    l = rnd_line();
    l[511:480] = mk(w, 0, a);
    return l;
  endfunction

  initial begin
    level_e pl [4];
    logic [ADDR_W-3:0] g;
    laddr_t listed [$], planted, held;
    int n_cls [4], n_old_tail, n_new_pack;
    level_e lv;
    logic [3:0] m;

    rng_valid = 0; rng_data = '0; rd_valid = 0; rd_addr = '0; rd_core = '0;
    ev_valid = 0; ev_group = '0; ev_present = '0; ev_dirty = '0; ev_core = '0;
    upf_valid = 0; upf_addr = '0; upf_core = '0;
    for (int i = 0; i < 4; i++) begin ev_prior[i] = LVL_UNCOMP; ev_lines[i] = '0; end
    for (int i = 0; i < 20; i++) begin w_old[i] = $urandom(); w_new[i] = $urandom(); end
    if (w_old[1] == w_old[0] || w_old[1] == ~w_old[0]) w_old[1] = w_old[0] ^ 32'h0F0F_0001;
    if (w_new[1] == w_new[0] || w_new[1] == ~w_new[0]) w_new[1] = w_new[0] ^ 32'h0F0F_0001;
    for (int c = 0; c < 4; c++) n_cls[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_words(w_old);
    @(negedge clk);
    check(init_done, "first marker set loaded");

    // ---- 1. a memory with packed, uncompressed and vacated locations
    for (int k = 0; k < 60; k++) begin
      int cls;
      g = 28'($urandom_range(0, GROUPS - 1));
      if (g == 28'd0) continue;
      fetch_group(g, pl);
      cls = $urandom_range(0, 3);
      for (int i = 0; i < 4; i++) gold[{g, 2'(i)}] = make_line(cls);
      evict(g, 4'b1111, pl);
      n_cls[cls]++;
    end
    // a line that only collides with the markers of the next set
    g = 28'(GROUPS - 1);
    fetch_group(g, pl);
    planted = {g, 2'd3};
    gold[planted] = collider(w_new, planted);
    for (int i = 0; i < 3; i++) gold[{g, 2'(i)}] = rnd_line();
    evict(g, 4'b1111, pl);
    check(mem.mem[planted] === gold[planted], "planted line stored as is under the first set");

    // ---- 2. fill the table, then overflow it
    for (int k = 0; k < 16; k++) begin
      g = 28'(16 + 7 * k);
      fetch_group(g, pl);
      listed.push_back({g, 2'd1});
      gold[{g, 2'd1}] = collider(w_old, {g, 2'd1});
      gold[{g, 2'd3}] = rnd_line();
      evict(g, 4'b1010, pl);
    end
    check(lit_used === 5'd16 && !lit_overflow, "table full");
    g = 28'(200);
    fetch_group(g, pl);
    held = {g, 2'd2};
    gold[held] = collider(w_old, held);
    gold[{g, 2'd0}] = rnd_line();
    start_evict(g, 4'b0101, pl);
    for (int k = 0; k < 40 && !rekey_active; k++) @(negedge clk);
    check(rekey_active, "re-key started");
    @(negedge clk);
    check(!init_done && rng_ready, "new words requested");
    stall_en = 1;
    load_words(w_new);
    for (int k = 0; k < 2000000 && rekey_active; k++) @(negedge clk);
    check(!rekey_active, "sweep finished");
    while (!rd_ready) @(negedge clk);
    stall_en = 0;

    // ---- 3. memory is encoded with the new set only
    n_old_tail = 0; n_new_pack = 0;
    for (int a = 0; a < MEM_LINES; a++) begin
      laddr_t la;
      line_t  d;
      la = laddr_t'(a);
      check(mem.mem.exists(la), "every location rewritten");
      d = mem.mem.exists(la) ? mem.mem[la] : '0;
      // the listed and held lines hold an old marker value as genuine data
      if (la != held && !(la inside {listed}) &&
          (d == il_of(w_old, la) || d[511:480] == mk(w_old, 0, la) || d[511:480] == mk(w_old, 1, la)))
        n_old_tail++;
      if (d[511:480] == mk(w_new, 0, la) || d[511:480] == mk(w_new, 1, la)) n_new_pack++;
    end
    check(n_old_tail === 0, $sformatf("%0d locations still carry an old marker", n_old_tail));
    check(n_new_pack > 0, "packed lines carry the new markers");
    foreach (listed[i])
      check(mem.mem[listed[i]] === gold[listed[i]], "formerly listed line stored plainly");
    check(mem.mem[planted] === ~gold[planted], "planted line now inverted");
    check(mem.mem[held] === gold[held], "held line written after the sweep");
    check(lit_used === 5'd1 && !lit_overflow, "only the planted line listed");
    // every line reads back right
    foreach (gold[a]) do_read(a, lv, m);
    do_read(30'd5, lv, m);
    $display("groups written per class: zero=%0d repeat=%0d delta=%0d random=%0d packed_locations=%0d",
             n_cls[0], n_cls[1], n_cls[2], n_cls[3], n_new_pack);
    check(n_cls[0] + n_cls[1] > 0 && n_cls[3] > 0, "packed and uncompressed groups present");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
