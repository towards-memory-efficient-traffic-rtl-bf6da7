// foodog: the FooDog per-stream filter and policer of one switch ingress port.
//
// Update plane: NUM_UU update units, one per stream period, each replay their
// period-wise GCL every pGCL cycle and offer the due entries; GateUpdateControl
// writes them, one per clock, into the stream-wise GCL, which therefore
// always holds the present open/closed state and queue of every stream's gate.
// Police plane: PolicingEnforce reads the stream-wise GCL with each frame
// descriptor's streamID and marks the descriptor discard (gate closed) or
// gives it its queueID (gate open).
//
// Memory: NUM_UU x PGCL_DEPTH x 45 bits of period-wise GCL plus
// N_STREAMS x 4 bits of stream-wise GCL, independent of the network cycle.
//
// Interface: cfg carries configuration from the switch's management block:
// period-wise GCL entries, and per unit its pGCL cycle period (in time ticks)
// and number of valid entries (0 = unit idle, the reset value). All units
// share network_cycle_start and the time tick. Descriptors: one per clock in,
// two clocks latency, no backpressure. init_done rises N_STREAMS clocks after
// reset, once every gate has been set to closed.
//
// From the paper: the block structure (8 UUs, GateUpdateControl,
// stream-wise GCL, PolicingEnforce) and all sizes. This design's own choices:
// the configuration word, the per-unit entry count, the tick.
module foodog
  import foodog_pkg::*;
#(
  parameter int unsigned NUM_UU     = DEF_NUM_UU,
  parameter int unsigned PGCL_DEPTH = DEF_PGCL_DEPTH,
  parameter int unsigned N_STREAMS  = DEF_N_STREAMS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              network_cycle_start,
  input  logic              time_tick,
  input  cfg_t              cfg,
  input  logic              desc_in_valid,
  input  logic [DESC_W-1:0] desc_in,
  output logic              desc_out_valid,
  output logic [DESC_W-1:0] desc_out,
  output logic              desc_out_bypass,
  output logic              init_done
);

  localparam int unsigned AW = $clog2(PGCL_DEPTH);

  // Per-unit configuration registers
  logic [TIME_W-1:0] pgcl_cycle [NUM_UU];
  logic [AW:0]       pgcl_len   [NUM_UU];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < NUM_UU; u++) begin
        pgcl_cycle[u] <= '0;
        pgcl_len[u]   <= '0;
      end
    end else if (cfg.valid && (32'(cfg.uu) < NUM_UU)) begin
      if (cfg.kind == CFG_PGCL_CYCLE) pgcl_cycle[cfg.uu] <= cfg.data[TIME_W-1:0];
      if (cfg.kind == CFG_PGCL_LEN)   pgcl_len[cfg.uu]   <= cfg.data[AW:0];
    end
  end

  sgcl_update_t [NUM_UU-1:0] uu_entry;
  logic [NUM_UU-1:0]         uu_valid;
  logic [NUM_UU-1:0]         uu_ready;

  for (genvar u = 0; u < NUM_UU; u++) begin : g_uu
    update_unit #(.DEPTH(PGCL_DEPTH)) u_uu (
      .clk, .rst_n, .network_cycle_start,
      .tick        (time_tick),
      .pgcl_cycle  (pgcl_cycle[u]),
      .pgcl_len    (pgcl_len[u]),
      .cfg_wr_en   (cfg.valid && cfg.kind == CFG_PGCL_ENTRY && 32'(cfg.uu) == u),
      .cfg_wr_addr (cfg.addr[AW-1:0]),
      .cfg_wr_data (pgcl_entry_t'(cfg.data)),
      .sgcl_entry  (uu_entry[u]),
      .sgcl_valid  (uu_valid[u]),
      .sgcl_ready  (uu_ready[u]),
      .cur_time    (),
      .cycle_start (),
      .addr_ptr    ()
    );
  end

  logic              sgcl_wr_en;
  logic [GATE_W-1:0] sgcl_wr_addr;
  sgcl_entry_t       sgcl_wr_data;
  logic [GATE_W-1:0] sgcl_rd_addr;
  sgcl_entry_t       sgcl_rd_data;

  gate_update_control #(.NUM_UU(NUM_UU)) u_ctrl (
    .clk, .rst_n,
    .req_entry (uu_entry),
    .req_valid (uu_valid),
    .req_ready (uu_ready),
    .wr_allow  (init_done),
    .sgcl_wr_en, .sgcl_wr_addr, .sgcl_wr_data
  );

  stream_wise_gcl #(.N_STREAMS(N_STREAMS)) u_sgcl (
    .clk, .rst_n,
    .wr_en   (sgcl_wr_en),
    .wr_addr (sgcl_wr_addr),
    .wr_data (sgcl_wr_data),
    .rd_addr (sgcl_rd_addr),
    .rd_data (sgcl_rd_data),
    .init_done
  );

  policing_enforce #(.N_STREAMS(N_STREAMS)) u_police (
    .clk, .rst_n, .desc_in_valid, .desc_in,
    .sgcl_rd_addr, .sgcl_rd_data,
    .desc_out_valid, .desc_out,
    .out_bypass (desc_out_bypass)
  );

endmodule
