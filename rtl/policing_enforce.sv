// policing_enforce: the PolicingEnforce module (the GateSwitch engine).
//
// For every frame descriptor it takes the streamID, reads the stream-wise GCL
// at that address, and rewrites the descriptor: discard = 0 and the gate's
// queueID if the gate is open, discard = 1 if it is closed (the queueID field
// is filled from the entry in both cases, as the text describes). A frame that
// arrives outside its stream's planned window thus leaves marked for discard.
//
// Interface and timing: one descriptor per clock may enter (desc_in_valid);
// each leaves two clocks later on desc_out_valid, in order, with no stall.
// Clock 1 presents the streamID to the RAM read port; clock 2 registers the
// rewritten descriptor. A streamID of N_STREAMS or more has no gate: such a
// descriptor is passed on unchanged and flagged on out_bypass.
//
// From the paper: the lookup by streamID, the discard and queueID rules
// and the worked example. This design's own choices: the two-clock
// pipeline and the pass-through of descriptors without a gate (the paper does
// not say what happens to them).
module policing_enforce
  import foodog_pkg::*;
#(
  parameter int unsigned N_STREAMS = DEF_N_STREAMS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              desc_in_valid,
  input  logic [DESC_W-1:0] desc_in,
  output logic [GATE_W-1:0] sgcl_rd_addr,
  input  sgcl_entry_t       sgcl_rd_data,
  output logic              desc_out_valid,
  output logic [DESC_W-1:0] desc_out,
  output logic              out_bypass
);

  logic [SID_W-1:0]  sid;
  logic              s1_valid;
  logic              s1_policed;
  logic [DESC_W-1:0] s1_desc;

  assign sid          = desc_stream_id(desc_in);
  assign sgcl_rd_addr = sid[GATE_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid       <= 1'b0;
      s1_policed     <= 1'b0;
      s1_desc        <= '0;
      desc_out_valid <= 1'b0;
      desc_out       <= '0;
      out_bypass     <= 1'b0;
    end else begin
      s1_valid   <= desc_in_valid;
      s1_policed <= 32'(sid) < N_STREAMS;
      s1_desc    <= desc_in;

      desc_out_valid <= s1_valid;
      out_bypass     <= s1_valid && !s1_policed;
      if (s1_valid) begin
        if (s1_policed)
          desc_out <= desc_police(s1_desc, sgcl_rd_data.gate_state != GATE_OPEN,
                                  sgcl_rd_data.queue_id);
        else
          desc_out <= s1_desc;
      end
    end
  end

endmodule
