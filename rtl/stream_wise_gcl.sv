// stream_wise_gcl: the RAM of the stream-wise GCL.
//
// Entry idx holds the present {gateState, queueID} of gate idx, and the gate of
// a stream has the stream's ID as its index, so a frame's streamID addresses
// its gate directly. GateUpdateControl writes the entries produced by the
// update units; PolicingEnforce reads one entry per frame.
//
// Interface and timing: simple dual-port RAM, one synchronous write port and
// one synchronous read port (rd_data one clock after rd_addr, old data when
// both ports hit one address). After reset the block first writes "closed,
// queue 0" to every entry, one per clock; init_done rises when that sweep is
// complete (N_STREAMS clocks) and writes from wr_* are ignored before it.
//
// From the paper: the two fields, depth equal to the number of streams (500)
// and the use of dual-port RAM. This design's own choice: the clearing sweep,
// so that every gate starts closed; the paper does not give a start state.
module stream_wise_gcl
  import foodog_pkg::*;
#(
  parameter int unsigned N_STREAMS = DEF_N_STREAMS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [GATE_W-1:0] wr_addr,
  input  sgcl_entry_t       wr_data,
  input  logic [GATE_W-1:0] rd_addr,
  output sgcl_entry_t       rd_data,
  output logic              init_done
);

  sgcl_entry_t mem [N_STREAMS];

  logic [GATE_W-1:0] init_addr;
  logic              we;
  logic [GATE_W-1:0] waddr;
  sgcl_entry_t       wdata;

  always_comb begin
    if (!init_done) begin
      we    = 1'b1;
      waddr = init_addr;
      wdata = '{gate_state: GATE_CLOSED, queue_id: '0};
    end else begin
      we    = wr_en && (32'(wr_addr) < N_STREAMS);
      waddr = wr_addr;
      wdata = wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_addr <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      if (32'(init_addr) == N_STREAMS - 1) init_done <= 1'b1;
      else                                 init_addr <= init_addr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < N_STREAMS)) mem[waddr] <= wdata;
    rd_data <= mem[rd_addr];
  end

endmodule
