// gate_update_control: the GateUpdateControl module.
//
// Several update units may have an entry due in the same clock, but the
// stream-wise GCL has one write port. This block takes the offered
// sgcl_entry of one update unit per clock and writes it into the stream-wise
// GCL at the address gateID, so the writes of all units are serialised.
// Units are served round robin, starting after the one served last, so no
// unit waits more than NUM_UU-1 clocks behind the others.
//
// Interface: req_valid / req_ready per unit are valid-ready handshakes; at most
// one req_ready is high in a clock. wr_allow (the stream-wise GCL's init_done)
// holds all requests off while it is low. The write port outputs are
// registered: an entry accepted in clock k is written at the end of clock k+1.
//
// From the paper: the block's task, sequential writes to avoid conflicts
// of several units. This design's own choice: round-robin order and the handshake.
//
// The assertions below sample rst_n synchronously (disable iff) while the
// flip-flops reset asynchronously; lint reports this mix, which concerns the
// checks only and not the circuit.
module gate_update_control
  import foodog_pkg::*;
#(
  parameter int unsigned NUM_UU = DEF_NUM_UU
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  sgcl_update_t [NUM_UU-1:0] req_entry,
  input  logic [NUM_UU-1:0]         req_valid,
  output logic [NUM_UU-1:0]         req_ready,
  input  logic                      wr_allow,
  output logic                      sgcl_wr_en,
  output logic [GATE_W-1:0]         sgcl_wr_addr,
  output sgcl_entry_t               sgcl_wr_data
);

  localparam int unsigned IW = (NUM_UU > 1) ? $clog2(NUM_UU) : 1;

  logic [IW-1:0] rr_next;   // unit with the highest priority in this clock
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int unsigned k = 0; k < NUM_UU; k++) begin
      int unsigned idx;
      idx = (32'(rr_next) + k) % NUM_UU;
      if (!any && req_valid[idx]) begin
        any = 1'b1;
        sel = IW'(idx);
      end
    end
    req_ready = '0;
    if (any && wr_allow) req_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_next      <= '0;
      sgcl_wr_en   <= 1'b0;
      sgcl_wr_addr <= '0;
      sgcl_wr_data <= '0;
    end else begin
      sgcl_wr_en <= any && wr_allow;
      if (any && wr_allow) begin
        sgcl_wr_addr <= req_entry[sel].gate_id;
        sgcl_wr_data <= req_entry[sel].entry;
        rr_next      <= (32'(sel) == NUM_UU - 1) ? '0 : sel + 1'b1;
      end
    end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_ready));
  a_grant_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (req_ready & ~req_valid) == '0);

endmodule
