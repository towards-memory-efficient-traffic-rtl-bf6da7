// update_unit: one UpdateUnit (UU), the part of FooDog that keeps the gates
// of all streams with one common period.
//
// A UU is a TimeCount, a GateUpdate engine and the RAM of one period-wise
// GCL. TimeCount produces the time within the pGCL cycle; the GateUpdate
// engine walks the RAM against that time and offers an sgcl_entry whenever an
// entry is due. The configuration path writes the RAM.
//
// Interface: cfg_wr_* write one period-wise GCL entry; pgcl_cycle is the pGCL
// cycle period in time ticks and pgcl_len the number of valid entries (both
// held by the caller). sgcl_valid / sgcl_ready hand entries to
// GateUpdateControl; cur_time, cycle_start and addr_ptr are status outputs. Latency: an entry whose updateTime equals t is offered in
// the clock after cur_time becomes t at the earliest.
//
// From the paper: the composition of a UU and its role.
module update_unit
  import foodog_pkg::*;
#(
  parameter int unsigned DEPTH = DEF_PGCL_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     network_cycle_start,
  input  logic                     tick,
  input  logic [TIME_W-1:0]        pgcl_cycle,
  input  logic [$clog2(DEPTH):0]   pgcl_len,
  input  logic                     cfg_wr_en,
  input  logic [$clog2(DEPTH)-1:0] cfg_wr_addr,
  input  pgcl_entry_t              cfg_wr_data,
  output sgcl_update_t             sgcl_entry,
  output logic                     sgcl_valid,
  input  logic                     sgcl_ready,
  output logic [TIME_W-1:0]        cur_time,
  output logic                     cycle_start,
  output logic [$clog2(DEPTH):0]   addr_ptr
);

  logic                     time_valid;
  logic [$clog2(DEPTH)-1:0] rd_addr;
  pgcl_entry_t              rd_data;

  time_count u_time_count (
    .clk, .rst_n, .network_cycle_start, .tick, .pgcl_cycle,
    .cur_time, .time_valid, .cycle_start
  );

  period_wise_gcl #(.DEPTH(DEPTH)) u_pgcl (
    .clk,
    .wr_en   (cfg_wr_en),
    .wr_addr (cfg_wr_addr),
    .wr_data (cfg_wr_data),
    .rd_addr,
    .rd_data
  );

  gate_update #(.DEPTH(DEPTH)) u_gate_update (
    .clk, .rst_n, .cur_time, .time_valid, .cycle_start, .pgcl_len,
    .rd_addr, .rd_data, .sgcl_entry, .sgcl_valid, .sgcl_ready, .addr_ptr
  );

endmodule
