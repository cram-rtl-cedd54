// cram_dyn -- Dynamic-CRAM: turns compression on or off by cost and benefit.
//
// Compression costs bandwidth (compressed writebacks of clean lines,
// invalidates of vacated locations, second accesses after a location
// misprediction) and pays back through lines that arrive free with a
// compressed neighbour and are then used (useful prefetches). As in the
// paper, a small sample of LLC sets always compresses and only their events
// are counted, in one 12-bit saturating utility counter per core (8 cores,
// 12 bytes): +1 per useful prefetch, -1 per cost event. The counter's most
// significant bit enables compression for that core's lines in all other
// sets.
//
// Sampling follows the paper's figure (set 0 of every 100 sets always
// compresses, the 99 others follow the counter): a line is sampled when the
// index of its 4-line group within the LLC set index, addr[SET_BITS-1:2],
// is a multiple of SAMPLE_PERIOD = 100, about 1% of the sets.
// Design choices: SET_BITS = 13 (8 MB, 16-way, 64-byte lines gives 8192
// sets); counters reset to the midpoint 2048 (compression on); up to 7 cost
// events of one core are applied in one cycle; benefit and cost in the same
// cycle are summed before saturation.
//
// Events from lines outside the sample are ignored: `ben_addr` is the line
// that was reused, `op_addr` the line or group that caused the cost events.
//
// Timing: `op_sampled` is combinational; counters update at the clock edge and
// `enable` follows from the registered counters.
module cram_dyn
  import cram_pkg::*;
#(
  parameter int unsigned NUM_CORES     = 8,
  parameter int unsigned CNT_W         = 12,
  parameter int unsigned SAMPLE_PERIOD = 100,
  parameter int unsigned SET_BITS      = 13
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  laddr_t                       op_addr,     // line whose cost events are reported
  output logic                         op_sampled,
  input  logic                         ben_valid,
  input  laddr_t                       ben_addr,
  input  logic [$clog2(NUM_CORES)-1:0] ben_core,
  input  logic                         cost_valid,
  input  logic [$clog2(NUM_CORES)-1:0] cost_core,
  input  logic [2:0]                   cost_cnt,
  output logic [NUM_CORES-1:0]         enable,
  output logic [CNT_W-1:0]             counter [NUM_CORES]
);

  localparam int unsigned GRP_W = SET_BITS - 2;
  localparam logic [CNT_W:0] MAXV = {1'b0, {CNT_W{1'b1}}};

  function automatic logic is_sampled(input laddr_t a);
    return (int'(a[SET_BITS-1:2]) % SAMPLE_PERIOD) == 0;
  endfunction

  logic ben_sampled;
  assign op_sampled  = is_sampled(op_addr);
  assign ben_sampled = is_sampled(ben_addr);

  always_comb
    for (int c = 0; c < NUM_CORES; c++) enable[c] = counter[c][CNT_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++) counter[c] <= {1'b1, {(CNT_W-1){1'b0}}};
    end else begin
      for (int c = 0; c < NUM_CORES; c++) begin
        logic signed [CNT_W+1:0] v;
        v = signed'({2'b00, counter[c]});
        if (ben_valid && ben_sampled && ben_core == c[$clog2(NUM_CORES)-1:0]) v = v + 1;
        if (cost_valid && op_sampled && cost_core == c[$clog2(NUM_CORES)-1:0]) v = v - signed'({{(CNT_W-1){1'b0}}, cost_cnt});
        if (v < 0) v = '0;
        if (v > signed'({1'b0, MAXV})) v = signed'({1'b0, MAXV});
        counter[c] <= v[CNT_W-1:0];
      end
    end
  end

  if (GRP_W < 1) begin : g_bad
    $error("SET_BITS must exceed 2");
  end

endmodule
