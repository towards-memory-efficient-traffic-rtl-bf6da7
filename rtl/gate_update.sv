// gate_update: the GateUpdate engine of one update unit.
//
// The engine keeps addr_ptr, the entry of its period-wise GCL that is due
// next. Whenever the pGCL time has reached that entry's updateTime, it offers
// the entry's {gateID, gateState, queueID} as an sgcl_entry to
// GateUpdateControl and, once accepted, moves addr_ptr to the next entry.
// Since entries are sorted by updateTime, only the entry at addr_ptr ever
// needs comparing. After the last valid entry (pgcl_len) the engine waits;
// at the start of the next pGCL cycle it returns to entry 0, so the list is
// replayed every period.
//
// Interface: rd_addr drives the read port of the period-wise GCL RAM and
// rd_data is that RAM's registered output. The engine presents as rd_addr
// the pointer it will hold in the next clock, so rd_data always holds the
// entry at addr_ptr and one entry can be issued per clock. sgcl_valid /
// sgcl_ready is a valid-ready handshake: the offer is held until accepted.
// pgcl_len = 0 leaves the engine idle.
//
// From the paper: addr_ptr, the sorted list, the comparison with the time and
// the write of gateState and queueID to the address gateID, the loop back to
// the first entry. The paper says both that an entry is applied when its
// updateTime "has expired" and when "the updateTime is greater than the
// current time"; this design follows the first, since the
// second would apply every entry at once. This design's own choices: the
// comparison is made in every clock (not only when the time changes), which
// also lets several entries with one updateTime drain one per clock; the
// entry count pgcl_len; the handshake.
//
// The assertions below sample rst_n synchronously (disable iff) while the
// flip-flops reset asynchronously; lint reports this mix, which concerns the
// checks only and not the circuit.
module gate_update
  import foodog_pkg::*;
#(
  parameter int unsigned DEPTH = DEF_PGCL_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // time from TimeCount
  input  logic [TIME_W-1:0]        cur_time,
  input  logic                     time_valid,
  input  logic                     cycle_start,
  // configuration: number of valid entries in the period-wise GCL
  input  logic [$clog2(DEPTH):0]   pgcl_len,
  // period-wise GCL read port
  output logic [$clog2(DEPTH)-1:0] rd_addr,
  input  pgcl_entry_t              rd_data,
  // sgcl_entry towards GateUpdateControl
  output sgcl_update_t             sgcl_entry,
  output logic                     sgcl_valid,
  input  logic                     sgcl_ready,
  // status
  output logic [$clog2(DEPTH):0]   addr_ptr
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic          data_ok;   // rd_data holds the entry at addr_ptr
  logic          fire;
  logic [AW:0]   next_ptr;

  assign sgcl_valid = time_valid && data_ok && !cycle_start &&
                      (addr_ptr < pgcl_len) && (32'(addr_ptr) < DEPTH) &&
                      (cur_time >= rd_data.update_time);
  assign fire       = sgcl_valid && sgcl_ready;

  assign sgcl_entry.gate_id          = rd_data.gate_id;
  assign sgcl_entry.entry.gate_state = rd_data.gate_state;
  assign sgcl_entry.entry.queue_id   = rd_data.queue_id;

  always_comb begin
    if (cycle_start)  next_ptr = '0;
    else if (fire)    next_ptr = addr_ptr + 1'b1;
    else              next_ptr = addr_ptr;
    rd_addr = (32'(next_ptr) < DEPTH) ? next_ptr[AW-1:0] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_ptr <= '0;
      data_ok  <= 1'b0;
    end else begin
      addr_ptr <= next_ptr;
      data_ok  <= 1'b1;
    end
  end

  // An offer, once made, stays until it is taken (the time only grows
  // within a pGCL cycle, so the comparison cannot fall back).
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (sgcl_valid && !sgcl_ready && !cycle_start) |=> (sgcl_valid || cycle_start));

endmodule
