// period_wise_gcl: the RAM of one period-wise GCL.
//
// Each entry is {updateTime, gateID, gateState, queueID}. The entries of the
// streams that share one period are stored in ascending updateTime order, two
// per stream (window opens, window closes), for the first frame of each stream
// only. The configuration side writes entries; the GateUpdate engine reads.
//
// Interface and timing: a simple dual-port RAM, one write port and one read
// port, both synchronous. rd_data shows mem[rd_addr] one clock after rd_addr
// is presented (read-before-write when both ports hit one address). Writes
// beyond DEPTH are ignored. The contents are not reset.
//
// From the paper: the four fields, the depth of 1000 and the use of dual-port
// RAM. This design's own choice: the read latency of one clock.
module period_wise_gcl
  import foodog_pkg::*;
#(
  parameter int unsigned DEPTH = DEF_PGCL_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  pgcl_entry_t              wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output pgcl_entry_t              rd_data
);

  pgcl_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
