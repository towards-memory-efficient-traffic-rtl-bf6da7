// foodog_switch_policing: the ingress policing stage of a NUM_PORTS-port TSN
// switch, one FooDog per port.
//
// Each port's ingress parser hands its frame descriptors to that port's FooDog,
// which marks late, early or unexpected time-sensitive frames for discard
// and sets the transmission queue of the others before the descriptors go to
// the switch fabric. The policers share the network-cycle start pulse and the
// synchronized time tick. Configuration is addressed to one port by cfg_port.
//
// Interface: per port a descriptor input and output (valid + 64-bit word,
// two clocks latency, no backpressure) and a bypass flag for descriptors whose
// streamID has no gate. init_done is high once every port's gates are
// initialised. The ingress parser, switch fabric, buffer manager, egress
// schedulers and management block of the switch are outside this block.
//
// From the paper: one FooDog per port between ingress processing and the
// switch, four ports. This design's own choice: the shared
// configuration bus with a port select.
module foodog_switch_policing
  import foodog_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = DEF_NUM_PORTS,
  parameter int unsigned NUM_UU     = DEF_NUM_UU,
  parameter int unsigned PGCL_DEPTH = DEF_PGCL_DEPTH,
  parameter int unsigned N_STREAMS  = DEF_N_STREAMS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              network_cycle_start,
  input  logic                              time_tick,
  input  logic [7:0]                        cfg_port,
  input  cfg_t                              cfg,
  input  logic [NUM_PORTS-1:0]              desc_in_valid,
  input  logic [NUM_PORTS-1:0][DESC_W-1:0]  desc_in,
  output logic [NUM_PORTS-1:0]              desc_out_valid,
  output logic [NUM_PORTS-1:0][DESC_W-1:0]  desc_out,
  output logic [NUM_PORTS-1:0]              desc_out_bypass,
  output logic                              init_done
);

  logic [NUM_PORTS-1:0] port_init_done;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    cfg_t port_cfg;
    always_comb begin
      port_cfg       = cfg;
      port_cfg.valid = cfg.valid && (32'(cfg_port) == p);
    end

    foodog #(
      .NUM_UU(NUM_UU), .PGCL_DEPTH(PGCL_DEPTH), .N_STREAMS(N_STREAMS)
    ) u_foodog (
      .clk, .rst_n, .network_cycle_start, .time_tick,
      .cfg             (port_cfg),
      .desc_in_valid   (desc_in_valid[p]),
      .desc_in         (desc_in[p]),
      .desc_out_valid  (desc_out_valid[p]),
      .desc_out        (desc_out[p]),
      .desc_out_bypass (desc_out_bypass[p]),
      .init_done       (port_init_done[p])
    );
  end

  assign init_done = &port_init_done;

endmodule
