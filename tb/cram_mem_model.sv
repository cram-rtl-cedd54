// cram_mem_model -- behavioural model of commodity DRAM behind a simple port.
//
// Not synthesizable logic: a sparse array of 64-byte lines standing in for
// the DDR4 memory and its conventional controller. One request per cycle
// over valid/ready; a read is answered LATENCY cycles after it was accepted,
// in order, with a one-cycle `rsp_valid` pulse. Writes take effect at once.
// With `stall_en` set the port refuses about one request in three, to
// exercise back-pressure. Locations never written read as zero. The testbench
// reaches `mem` directly to preload and inspect lines.
module cram_mem_model
  import cram_pkg::*;
#(
  parameter int unsigned LATENCY = 6
) (
  input  logic   clk,
  input  logic   stall_en,
  input  logic   req_valid,
  output logic   req_ready,
  input  logic   req_write,
  input  laddr_t req_addr,
  input  line_t  req_data,
  output logic   rsp_valid,
  output line_t  rsp_data
);

  line_t mem [laddr_t];

  int     wait_cnt = 0;
  line_t  pend_data;
  logic   stall_now = 1'b0;
  int unsigned n_reads = 0, n_writes = 0, n_stalls = 0;

  assign req_ready = !stall_now && wait_cnt == 0;

  initial rsp_valid = 1'b0;
  initial rsp_data  = '0;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (wait_cnt > 0) begin
      wait_cnt <= wait_cnt - 1;
      if (wait_cnt == 1) begin
        rsp_valid <= 1'b1;
        rsp_data  <= pend_data;
      end
    end
    if (req_valid && !req_ready) n_stalls++;
    if (req_valid && req_ready) begin
      if (req_write) begin
        mem[req_addr] = req_data;
        n_writes++;
      end else begin
        pend_data = mem.exists(req_addr) ? mem[req_addr] : '0;
        wait_cnt <= LATENCY;
        n_reads++;
      end
    end
    stall_now <= stall_en && ($urandom_range(0, 2) == 0);
  end

endmodule
