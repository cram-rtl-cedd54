// cram_top -- CRAM compressed-memory logic of the memory controller.
//
// Sits between the last-level cache (LLC) and a conventional DRAM request
// port that moves one 64-byte line per access. Memory keeps its fixed
// capacity; compression is used only to fetch up to four neighbouring lines
// in one access. Lines of an aligned group of four (A, B, C, D) are stored
// uncompressed in their own locations, 2-to-1 (A+B in A's location, C+D in
// C's) or 4-to-1 (all four in A's location). A compressed line carries a
// per-line 4-byte marker in its last four bytes, and locations left behind by
// compression hold the 64-byte invalid-line marker, so the controller never
// reads metadata: the data tells what it is.
//
// Read path (LLC miss, `rd_*` -> `rsp_*`):
//   1. The Line Location Predictor guesses the group's level and so the
//      location; the line is read there.
//   2. The line is classified by its markers. If it holds the requested line
//      the level is known; a line matching a complemented marker is inverted
//      back when the Line Inversion Table lists its address.
//   3. Otherwise (invalid-line marker, or a packed line that does not include
//      the requested one) the next untried possible location is read:
//      own, then the pair's first line, then A. At most three reads.
//   4. The 1, 2 or 4 lines obtained are returned for the LLC with their
//      level (which the LLC keeps in a 2-bit tag) and the predictor learns
//      the level.
// Eviction path (`ev_*`): the LLC evicts a whole group at once (ganged
// eviction; present, dirty and prior-level bits per line). If compression is
// enabled for the group, four present lines that each fit 15 bytes are packed
// 4-to-1, otherwise each pair of present lines that fit 30 bytes is packed
// 2-to-1, clean lines included. Then, location by location (A..D), the
// controller writes packed lines with the marker, writes uncompressed lines
// that are dirty or must move back to their own location, invalidates
// locations vacated by the new packing that held data, and skips the rest.
// An uncompressed line whose data collides with a marker is written inverted
// and its address entered in the Line Inversion Table; any other write to a
// listed location removes it.
// LIT overflow (the paper's second recovery option): when the table is full
// and another colliding line is to be written, that write is held back and
// the insert raises the table's overflow flag. The controller then reloads
// new global markers and a new key from the `rng_*` port, keeps a copy of
// the old set, and sweeps all MEM_LINES locations: each is read, classified
// with the old markers (and the old LIT entries), and written back encoded
// with the new ones -- packed lines get the new marker, invalid-line markers
// the new Marker-IL, uncompressed lines are un-inverted if listed and
// re-checked for collision against the new markers, updating the LIT. The
// held eviction then resumes at the line it stopped on. No request is taken
// during the sweep (`rekey_active`). Not handled: the table filling up
// again within one sweep (a 17th collision with the fresh random markers).
// Dynamic-CRAM: groups in the sampled sets always compress and report their
// costs (clean compressed writebacks, invalidates, mispredicted reads); the
// LLC reports useful prefetches (`upf_*`); each core's utility counter turns
// compression on or off for its other groups.
//
// Design choices: one request at a time (read or eviction), reads first; the
// memory port is valid/ready for requests, responses come back in order one
// per read request; markers are loaded from the `rng_*` port after reset and
// no request is accepted before `init_done`. A response is a one-cycle
// pulse that the LLC must take. The table fill is shown on `lit_used`.
// The re-key sweep goes through locations in address order, one read then
// one write at a time; the old markers are held in a second register set
// for its duration. The predicted level from the LLP and the per-core
// utility counter values are not used here (only the predicted location and
// the enable bits are), so lint reports them as unused signals.
// The compressor is a hybrid of BDI and FPC, per line, with fixed
// 30/15-byte slots; see cram_bdi_comp and cram_fpc_comp.
//
// Timing: a read takes, per memory access, one cycle to issue, the memory
// latency, one cycle to capture the data and one to classify it, plus one
// response cycle (1 access with latency L: L + 4 cycles from the accepting
// edge to the response). An eviction
// takes one planning cycle plus one cycle per location (four) plus memory
// back-pressure. A re-key sweep takes about 2 * MEM_LINES accesses plus the
// memory latency of each read.
module cram_top
  import cram_pkg::*;
#(
  parameter int unsigned LIT_ENTRIES   = 16,
  parameter int unsigned LCT_ENTRIES   = 512,
  parameter int unsigned NUM_CORES     = 8,
  parameter int unsigned CNT_W         = 12,
  parameter int unsigned SAMPLE_PERIOD = 100,
  parameter int unsigned SET_BITS      = 13,
  parameter int unsigned MEM_LINES     = 2**28,   // 16 GB of 64-byte lines
  localparam int unsigned CORE_W       = $clog2(NUM_CORES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // boot-time random words for the markers
  input  logic               rng_valid,
  input  logic [31:0]        rng_data,
  output logic               rng_ready,
  output logic               init_done,
  // LLC read miss
  input  logic               rd_valid,
  output logic               rd_ready,
  input  laddr_t             rd_addr,
  input  logic [CORE_W-1:0]  rd_core,
  // lines returned to the LLC
  output logic               rsp_valid,
  output laddr_t             rsp_addr,       // the line that was requested
  output logic [3:0]         rsp_mask,       // which lines of the group are returned
  output line_t              rsp_lines [4],  // indexed by offset in the group
  output level_e             rsp_level,
  output logic [CORE_W-1:0]  rsp_core,
  output logic [1:0]         rsp_reads,      // memory reads it took (1..3)
  // ganged eviction of a group from the LLC
  input  logic               ev_valid,
  output logic               ev_ready,
  input  logic [ADDR_W-3:0]  ev_group,
  input  logic [3:0]         ev_present,
  input  logic [3:0]         ev_dirty,
  input  level_e             ev_prior [4],   // level each line had when read
  input  line_t              ev_lines [4],
  input  logic [CORE_W-1:0]  ev_core,
  // useful prefetch seen by the LLC (first use of a line that came packed)
  input  logic               upf_valid,
  input  laddr_t             upf_addr,
  input  logic [CORE_W-1:0]  upf_core,
  // memory request port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_write,
  output laddr_t             mem_req_addr,
  output line_t              mem_req_data,
  input  logic               mem_rsp_valid,
  input  line_t              mem_rsp_data,
  // status and event pulses
  output logic               lit_overflow,
  output logic               rekey_active,
  output logic [$clog2(LIT_ENTRIES+1)-1:0] lit_used,
  output logic [NUM_CORES-1:0] comp_enable,
  output logic               evt_mispredict,
  output logic               evt_comp_write,
  output logic               evt_invalidate,
  output logic               evt_inverted_write,
  output logic               evt_inverted_read,
  output logic               evt_relocate
);

  typedef enum logic [3:0] {
    S_IDLE, S_RD_ISSUE, S_RD_WAIT, S_RD_EVAL, S_RD_RESP, S_WR_PLAN, S_WR_ISSUE,
    S_RK_START, S_RK_LOAD, S_RK_READ, S_RK_WAIT, S_RK_WRITE
  } state_e;

  localparam logic [ADDR_W-3:0] LAST_GROUP = (ADDR_W-2)'(MEM_LINES / 4 - 1);

  typedef enum logic [2:0] {
    A_NONE, A_PACK4, A_PACK2, A_RAW, A_IL
  } wact_e;

  state_e state;

  // ---------------------------------------------------------------- markers
  marker_t       g_m2, g_m4;
  line_t         g_il;
  logic [63:0]   key;
  laddr_t        mk_addr;
  line_markers_t lm;

  logic          mk_reload;

  cram_marker_regs u_markers (
    .clk, .rst_n, .reload(mk_reload), .rng_valid, .rng_data, .rng_ready, .ready(init_done),
    .m2(g_m2), .m4(g_m4), .il(g_il), .key
  );

  cram_line_marker u_line_marker (
    .g_m2, .g_m4, .g_il, .key, .addr(mk_addr), .lm
  );

  // previous marker set, kept while memory is re-encoded
  marker_t       o_m2, o_m4;
  line_t         o_il;
  logic [63:0]   o_key;
  line_markers_t lm_old;
  logic [ADDR_W-3:0] k_group;
  logic [1:0]    k_idx;
  laddr_t        k_loc;
  line_t         k_data;
  rd_status_e    k_status;

  assign k_loc = {k_group, k_idx};

  cram_line_marker u_line_marker_old (
    .g_m2(o_m2), .g_m4(o_m4), .g_il(o_il), .key(o_key), .addr(k_loc), .lm(lm_old)
  );

  cram_line_classifier u_class_old (.data(k_data), .lm(lm_old), .status(k_status));

  // ---------------------------------------------------------------- read state
  laddr_t             r_addr, r_loc;
  logic [CORE_W-1:0]  r_core;
  logic [3:0]         r_tried;     // group offsets already read
  line_t              r_data;
  level_e             r_level;
  logic               r_invert;
  logic [1:0]         r_reads;

  // ---------------------------------------------------------------- write state
  logic [ADDR_W-3:0]  w_group;
  logic [3:0]         w_present, w_dirty;
  level_e             w_prior [4];
  line_t              w_lines [4];
  logic [CORE_W-1:0]  w_core;
  wact_e              w_act [4];
  logic [3:0]         w_cost;
  logic [1:0]         w_idx;
  laddr_t             w_loc;

  assign w_loc = {w_group, w_idx};

  // ---------------------------------------------------------------- LIT
  laddr_t lit_lookup_addr;
  laddr_t lit_upd_addr;
  logic   lit_hit, lit_upd_valid, lit_upd_insert, lit_clear;

  cram_lit #(.ENTRIES(LIT_ENTRIES)) u_lit (
    .clk, .rst_n, .clear(lit_clear),
    .lookup_addr(lit_lookup_addr), .lookup_hit(lit_hit),
    .upd_valid(lit_upd_valid), .upd_insert(lit_upd_insert), .upd_addr(lit_upd_addr),
    .overflow(lit_overflow), .count(lit_used)
  );

  // ---------------------------------------------------------------- LLP
  level_e pred_level;
  laddr_t pred_loc;
  logic   llp_upd;

  cram_llp #(.ENTRIES(LCT_ENTRIES)) u_llp (
    .clk, .rst_n,
    .pred_addr(rd_addr), .pred_level, .pred_loc,
    .upd_valid(llp_upd), .upd_addr(r_addr), .upd_level(r_level)
  );

  // ---------------------------------------------------------------- Dynamic-CRAM
  logic   dyn_sampled, dyn_cost;
  laddr_t dyn_addr;
  logic [CORE_W-1:0] dyn_core;
  logic [CNT_W-1:0]  dyn_counter [NUM_CORES];

  cram_dyn #(.NUM_CORES(NUM_CORES), .CNT_W(CNT_W), .SAMPLE_PERIOD(SAMPLE_PERIOD),
             .SET_BITS(SET_BITS)) u_dyn (
    .clk, .rst_n,
    .op_addr(dyn_addr), .op_sampled(dyn_sampled),
    .ben_valid(upf_valid), .ben_addr(upf_addr), .ben_core(upf_core),
    .cost_valid(dyn_cost), .cost_core(dyn_core), .cost_cnt(3'd1),
    .enable(comp_enable), .counter(dyn_counter)
  );

  // ---------------------------------------------------------------- compressors
  // Hybrid: each line is compressed by BDI and by FPC, and the slot of the
  // one that fits the smaller space is kept (BDI when both fit equally).
  slot_t c_slot [4];
  logic  c_fits2 [4];
  logic  c_fits4 [4];
  slot_t b_slot [4], f_slot [4];
  logic  b_fits2 [4], b_fits4 [4], f_fits2 [4], f_fits4 [4];

  for (genvar i = 0; i < 4; i++) begin : g_comp
    cram_bdi_comp u_bdi (.line(w_lines[i]), .slot(b_slot[i]), .fits2(b_fits2[i]), .fits4(b_fits4[i]));
    cram_fpc_comp u_fpc (.line(w_lines[i]), .slot(f_slot[i]), .fits2(f_fits2[i]), .fits4(f_fits4[i]));
    always_comb begin
      c_fits4[i] = b_fits4[i] || f_fits4[i];
      c_fits2[i] = b_fits2[i] || f_fits2[i];
      if (b_fits4[i] || (b_fits2[i] && !f_fits4[i]) || !f_fits2[i]) c_slot[i] = b_slot[i];
      else                                                           c_slot[i] = f_slot[i];
    end
  end

  // ---------------------------------------------------------------- decompressors
  slot_t d_slot [4];
  line_t d_line [4];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      if (r_level == LVL_4TO1) d_slot[i] = slot_t'(r_data[SLOT4_BYTES*8*i +: SLOT4_BYTES*8]);
      else if (i < 2)          d_slot[i] = r_data[SLOT_BITS*i +: SLOT_BITS];
      else                     d_slot[i] = '0;
    end
  end

  line_t db_line [4], df_line [4];

  for (genvar i = 0; i < 4; i++) begin : g_decomp
    cram_bdi_decomp u_bdi (.slot(d_slot[i]), .line(db_line[i]));
    cram_fpc_decomp u_fpc (.slot(d_slot[i]), .line(df_line[i]));
    assign d_line[i] = (d_slot[i][7:0] == FPC_ID) ? df_line[i] : db_line[i];
  end

  // ---------------------------------------------------------------- read evaluation
  rd_status_e rd_status;
  logic       rd_found;
  level_e     rd_found_level;
  logic [1:0] next_off;
  logic       next_ok;

  cram_line_classifier u_class (.data(r_data), .lm, .status(rd_status));

  always_comb begin
    rd_found       = 1'b0;
    rd_found_level = LVL_UNCOMP;
    if (rd_status == ST_4TO1 && r_loc == level_loc(r_addr, LVL_4TO1)) begin
      rd_found = 1'b1; rd_found_level = LVL_4TO1;
    end else if (rd_status == ST_2TO1 && r_loc == level_loc(r_addr, LVL_2TO1)) begin
      rd_found = 1'b1; rd_found_level = LVL_2TO1;
    end else if ((rd_status == ST_UNCOMP || rd_status == ST_INV_CAND) && r_loc == r_addr) begin
      rd_found = 1'b1; rd_found_level = LVL_UNCOMP;
    end
    // next location to try: own, pair base, group base, skipping offsets read
    next_ok  = 1'b0;
    next_off = r_addr[1:0];
    for (int l = 2; l >= 0; l--) begin
      logic [1:0] off;
      off = level_loc(r_addr, level_e'(l))[1:0];
      if (!r_tried[off]) begin
        next_ok  = 1'b1;
        next_off = off;
      end
    end
  end

  // ---------------------------------------------------------------- eviction plan
  logic   allow, full4;
  logic   pair_ok [2];
  wact_e  p_act [4];
  logic [3:0] p_cost;

  function automatic logic held_data(input logic [1:0] loc, input level_e prior);
    // did this location hold live data before this eviction?
    if (loc == 2'd0)             return 1'b1;
    else if (prior == LVL_UNCOMP) return 1'b1;
    else if (loc == 2'd2 && prior == LVL_2TO1) return 1'b1;
    else                          return 1'b0;
  endfunction

  always_comb begin
    allow = dyn_sampled || comp_enable[w_core];
    full4 = allow && (&w_present) && c_fits4[0] && c_fits4[1] && c_fits4[2] && c_fits4[3];
    for (int p = 0; p < 2; p++)
      pair_ok[p] = allow && !full4 && w_present[2*p] && w_present[2*p+1] &&
                   c_fits2[2*p] && c_fits2[2*p+1];
    for (int i = 0; i < 4; i++) begin
      logic [1:0] off;
      off       = 2'(i);
      p_act[i]  = A_NONE;
      p_cost[i] = 1'b0;
      if (full4) begin
        if (i == 0) begin
          if ((|w_dirty) || w_prior[0] != LVL_4TO1 || w_prior[1] != LVL_4TO1 ||
              w_prior[2] != LVL_4TO1 || w_prior[3] != LVL_4TO1) begin
            p_act[i]  = A_PACK4;
            p_cost[i] = !(|w_dirty);
          end
        end else if (held_data(off, w_prior[i])) begin
          p_act[i] = A_IL; p_cost[i] = 1'b1;
        end
      end else if (pair_ok[i/2]) begin
        if (i % 2 == 0) begin
          if (w_dirty[i] || w_dirty[i+1] || w_prior[i] != LVL_2TO1 || w_prior[i+1] != LVL_2TO1) begin
            p_act[i]  = A_PACK2;
            p_cost[i] = !(w_dirty[i] || w_dirty[i+1]);
          end
        end else if (held_data(off, w_prior[i])) begin
          p_act[i] = A_IL; p_cost[i] = 1'b1;
        end
      end else if (w_present[i] && (w_dirty[i] || w_prior[i] != LVL_UNCOMP)) begin
        p_act[i] = A_RAW;
      end
    end
  end

  // ---------------------------------------------------------------- write data
  line_t  wr_data;
  logic   wr_collide;
  line_t  cur_line;

  always_comb begin
    cur_line   = w_lines[w_idx];
    wr_collide = 1'b0;
    wr_data    = cur_line;
    unique case (w_act[w_idx])
      A_PACK4: wr_data = {lm.m4, c_slot[3][119:0], c_slot[2][119:0], c_slot[1][119:0], c_slot[0][119:0]};
      A_PACK2: wr_data = {lm.m2, c_slot[{w_idx[1], 1'b1}], c_slot[{w_idx[1], 1'b0}]};
      A_IL:    wr_data = lm.il;
      A_RAW: begin
        wr_collide = cur_line[LINE_BITS-1 -: MARKER_BITS] == lm.m2 ||
                     cur_line[LINE_BITS-1 -: MARKER_BITS] == lm.m4 ||
                     cur_line == lm.il;
        wr_data    = wr_collide ? ~cur_line : cur_line;
      end
      default: wr_data = cur_line;
    endcase
  end

  // ---------------------------------------------------------------- re-encode data
  line_t k_wdata, k_true;
  logic  k_collide;

  always_comb begin
    k_true    = (k_status == ST_INV_CAND && lit_hit) ? ~k_data : k_data;
    k_collide = 1'b0;
    unique case (k_status)
      ST_4TO1:    k_wdata = {lm.m4, k_data[LINE_BITS-MARKER_BITS-1:0]};
      ST_2TO1:    k_wdata = {lm.m2, k_data[LINE_BITS-MARKER_BITS-1:0]};
      ST_INVALID: k_wdata = lm.il;
      default: begin
        k_collide = k_true[LINE_BITS-1 -: MARKER_BITS] == lm.m2 ||
                    k_true[LINE_BITS-1 -: MARKER_BITS] == lm.m4 ||
                    k_true == lm.il;
        k_wdata   = k_collide ? ~k_true : k_true;
      end
    endcase
  end

  // ---------------------------------------------------------------- shared muxes
  always_comb begin
    if (state == S_WR_ISSUE)      mk_addr = w_loc;
    else if (state == S_RK_WRITE) mk_addr = k_loc;
    else                          mk_addr = r_loc;
    if (state == S_WR_ISSUE)      lit_lookup_addr = w_loc;
    else if (state == S_RK_WRITE) lit_lookup_addr = k_loc;
    else                          lit_lookup_addr = r_addr;
    dyn_addr        = (state == S_WR_PLAN || state == S_WR_ISSUE) ? {w_group, 2'b00} : r_addr;
    dyn_core        = (state == S_WR_PLAN || state == S_WR_ISSUE) ? w_core : r_core;
  end

  // a colliding line that the full table cannot list is held back
  logic wr_hold, wr_go, wr_fire, k_fire;
  assign wr_hold = (state == S_WR_ISSUE) && (w_act[w_idx] == A_RAW) && wr_collide && !lit_hit &&
                   (lit_used == ($clog2(LIT_ENTRIES+1))'(LIT_ENTRIES));
  assign wr_go   = (state == S_WR_ISSUE) && (w_act[w_idx] != A_NONE) && !wr_hold && !lit_overflow;
  assign wr_fire = wr_go && mem_req_ready;
  assign k_fire  = (state == S_RK_WRITE) && mem_req_ready;

  assign lit_upd_valid  = wr_fire || k_fire || (wr_hold && !lit_overflow);
  assign lit_upd_insert = (state == S_RK_WRITE) ? k_collide : wr_collide;
  assign lit_upd_addr   = (state == S_RK_WRITE) ? k_loc : w_loc;
  assign lit_clear      = (state == S_RK_START);
  assign mk_reload      = (state == S_RK_START);
  assign rekey_active   = (state == S_RK_START) || (state == S_RK_LOAD) || (state == S_RK_READ) ||
                          (state == S_RK_WAIT) || (state == S_RK_WRITE);

  assign mem_req_valid = (state == S_RD_ISSUE) || wr_go || (state == S_RK_READ) || (state == S_RK_WRITE);
  assign mem_req_write = (state == S_WR_ISSUE) || (state == S_RK_WRITE);
  always_comb begin
    if (state == S_WR_ISSUE)                              mem_req_addr = w_loc;
    else if (state == S_RK_READ || state == S_RK_WRITE)   mem_req_addr = k_loc;
    else                                                  mem_req_addr = r_loc;
  end
  assign mem_req_data  = (state == S_RK_WRITE) ? k_wdata : wr_data;

  assign rd_ready = (state == S_IDLE) && init_done;
  assign ev_ready = (state == S_IDLE) && init_done && !rd_valid;

  assign llp_upd = (state == S_RD_RESP);

  // events
  assign evt_mispredict     = (state == S_RD_EVAL) && !rd_found && next_ok;
  assign evt_comp_write     = wr_fire && (w_act[w_idx] == A_PACK4 || w_act[w_idx] == A_PACK2);
  assign evt_invalidate     = wr_fire && (w_act[w_idx] == A_IL);
  assign evt_inverted_write = wr_fire && wr_collide;
  assign evt_inverted_read  = (state == S_RD_RESP) && r_invert;
  assign evt_relocate       = wr_fire && (w_act[w_idx] == A_RAW) && (w_prior[w_idx] != LVL_UNCOMP);
  assign dyn_cost           = evt_mispredict || (wr_fire && w_cost[w_idx]);

  // ---------------------------------------------------------------- response
  always_comb begin
    rsp_valid = (state == S_RD_RESP);
    rsp_addr  = r_addr;
    rsp_level = r_level;
    rsp_core  = r_core;
    rsp_reads = r_reads;
    rsp_mask  = '0;
    for (int i = 0; i < 4; i++) rsp_lines[i] = '0;
    unique case (r_level)
      LVL_4TO1: begin
        rsp_mask = 4'b1111;
        for (int i = 0; i < 4; i++) rsp_lines[i] = d_line[i];
      end
      LVL_2TO1: begin
        rsp_mask[{r_addr[1], 1'b0}]      = 1'b1;
        rsp_mask[{r_addr[1], 1'b1}]      = 1'b1;
        rsp_lines[{r_addr[1], 1'b0}]     = d_line[0];
        rsp_lines[{r_addr[1], 1'b1}]     = d_line[1];
      end
      default: begin
        rsp_mask[r_addr[1:0]]  = 1'b1;
        rsp_lines[r_addr[1:0]] = r_invert ? ~r_data : r_data;
      end
    endcase
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      r_addr   <= '0;
      r_loc    <= '0;
      r_core   <= '0;
      r_tried  <= '0;
      r_data   <= '0;
      r_level  <= LVL_UNCOMP;
      r_invert <= 1'b0;
      r_reads  <= '0;
      w_group  <= '0;
      w_present <= '0;
      w_dirty  <= '0;
      w_core   <= '0;
      w_cost   <= '0;
      w_idx    <= '0;
      o_m2     <= '0;
      o_m4     <= '0;
      o_il     <= '0;
      o_key    <= '0;
      k_group  <= '0;
      k_idx    <= '0;
      k_data   <= '0;
      for (int i = 0; i < 4; i++) begin
        w_prior[i] <= LVL_UNCOMP;
        w_lines[i] <= '0;
        w_act[i]   <= A_NONE;
      end
    end else begin
      unique case (state)
        S_IDLE: begin
          if (rd_valid && rd_ready) begin
            r_addr   <= rd_addr;
            r_core   <= rd_core;
            r_loc    <= pred_loc;
            r_tried  <= '0;
            r_reads  <= '0;
            r_invert <= 1'b0;
            state    <= S_RD_ISSUE;
          end else if (ev_valid && ev_ready) begin
            w_group   <= ev_group;
            w_present <= ev_present;
            w_dirty   <= ev_dirty & ev_present;
            w_core    <= ev_core;
            for (int i = 0; i < 4; i++) begin
              w_prior[i] <= ev_prior[i];
              w_lines[i] <= ev_lines[i];
            end
            state <= S_WR_PLAN;
          end
        end
        S_RD_ISSUE: begin
          if (mem_req_ready) begin
            r_tried[r_loc[1:0]] <= 1'b1;
            r_reads <= r_reads + 2'd1;
            state   <= S_RD_WAIT;
          end
        end
        S_RD_WAIT: begin
          if (mem_rsp_valid) begin
            r_data <= mem_rsp_data;
            state  <= S_RD_EVAL;
          end
        end
        S_RD_EVAL: begin
          if (rd_found) begin
            r_level  <= rd_found_level;
            r_invert <= (rd_status == ST_INV_CAND) && lit_hit;
            state    <= S_RD_RESP;
          end else if (next_ok) begin
            r_loc <= {r_addr[ADDR_W-1:2], next_off};
            state <= S_RD_ISSUE;
          end else begin
            // no location holds the line: memory is corrupt; return the raw
            // data of the line's own location as uncompressed
            r_level <= LVL_UNCOMP;
            state   <= S_RD_RESP;
          end
        end
        S_RD_RESP: state <= S_IDLE;
        S_WR_PLAN: begin
          for (int i = 0; i < 4; i++) w_act[i] <= p_act[i];
          w_cost <= p_cost;
          w_idx  <= 2'd0;
          state  <= S_WR_ISSUE;
        end
        S_WR_ISSUE: begin
          if (lit_overflow) begin
            state <= S_RK_START;
          end else if (w_act[w_idx] == A_NONE || (mem_req_ready && !wr_hold)) begin
            w_idx <= w_idx + 2'd1;
            if (w_idx == 2'd3) state <= S_IDLE;
          end
        end
        S_RK_START: begin
          o_m2    <= g_m2;
          o_m4    <= g_m4;
          o_il    <= g_il;
          o_key   <= key;
          k_group <= '0;
          k_idx   <= '0;
          state   <= S_RK_LOAD;
        end
        S_RK_LOAD:  if (init_done) state <= S_RK_READ;
        S_RK_READ:  if (mem_req_ready) state <= S_RK_WAIT;
        S_RK_WAIT: begin
          if (mem_rsp_valid) begin
            k_data <= mem_rsp_data;
            state  <= S_RK_WRITE;
          end
        end
        S_RK_WRITE: begin
          if (mem_req_ready) begin
            k_idx <= k_idx + 2'd1;
            if (k_idx == 2'd3) k_group <= k_group + 1'b1;
            if (k_idx == 2'd3 && k_group == LAST_GROUP) state <= S_WR_ISSUE;
            else                                        state <= S_RK_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  // A write must never leave a line in memory that looks like a marker
  // without being a packed line.
  assert property (@(posedge clk) disable iff (!rst_n)
    (wr_fire && w_act[w_idx] == A_RAW) |->
      (wr_data[LINE_BITS-1 -: MARKER_BITS] != lm.m2 && wr_data[LINE_BITS-1 -: MARKER_BITS] != lm.m4 &&
       wr_data != lm.il));
  assert property (@(posedge clk) disable iff (!rst_n)
    (k_fire && (k_status == ST_UNCOMP || k_status == ST_INV_CAND)) |->
      (k_wdata[LINE_BITS-1 -: MARKER_BITS] != lm.m2 && k_wdata[LINE_BITS-1 -: MARKER_BITS] != lm.m4 &&
       k_wdata != lm.il));
  // the read path must find every line it is asked for
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RD_EVAL) |-> (rd_found || next_ok));

endmodule
