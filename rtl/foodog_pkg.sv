// foodog_pkg: field widths, entry formats and default sizes shared by the
// FooDog per-stream policer.
//
// FooDog polices time-sensitive frames at a switch ingress port with two
// tables. A period-wise GCL (one per stream period) holds, for every stream
// of that period, only the opening and closing edge of the first arrival
// window of the stream; replaying it every period reproduces all windows of
// the network cycle. A stream-wise GCL holds the present gate state and
// target queue of every stream and is read once per frame.
//
// From the paper: updateTime 32 bit, gateID 9 bit, gateState 1 bit, queueID
// 3 bit, streamID 14 bit, 64-bit frame descriptor carrying queueID, streamID
// and discard, 500 streams, 8 period-wise GCLs of 1000 entries, 4 ports.
// This design's own choice: the bit positions of the three descriptor fields
// (the paper gives their widths only) and the configuration word format.
package foodog_pkg;

  // Field widths (from the paper)
  localparam int unsigned TIME_W = 32;  // updateTime / time
  localparam int unsigned GATE_W = 9;   // gateID, enough for 500 gates
  localparam int unsigned QUE_W  = 3;   // queueID, eight queues per port
  localparam int unsigned SID_W  = 14;  // streamID in the descriptor
  localparam int unsigned DESC_W = 64;  // frame descriptor

  // Default sizes (from the paper's prototype)
  localparam int unsigned DEF_N_STREAMS  = 500;
  localparam int unsigned DEF_NUM_UU     = 8;
  localparam int unsigned DEF_PGCL_DEPTH = 1000;
  localparam int unsigned DEF_NUM_PORTS  = 4;

  // Configuration address field: enough for a period-wise GCL of up to 1024 entries
  localparam int unsigned PGCL_AW = 10;

  // Descriptor field positions (this design's choice)
  localparam int unsigned DESC_SID_LSB     = 0;   // streamID  [13:0]
  localparam int unsigned DESC_QID_LSB     = 14;  // queueID   [16:14]
  localparam int unsigned DESC_DISCARD_BIT = 17;  // discard   [17]

  // gateState encoding, as in the PolicingEnforce text: 1 = open, 0 = closed
  localparam logic GATE_OPEN   = 1'b1;
  localparam logic GATE_CLOSED = 1'b0;

  // One period-wise GCL entry: {updateTime, gateID, gateState, queueID} = 45 bits
  typedef struct packed {
    logic [TIME_W-1:0] update_time;
    logic [GATE_W-1:0] gate_id;
    logic              gate_state;
    logic [QUE_W-1:0]  queue_id;
  } pgcl_entry_t;

  // One stream-wise GCL entry: {gateState, queueID} = 4 bits
  typedef struct packed {
    logic             gate_state;
    logic [QUE_W-1:0] queue_id;
  } sgcl_entry_t;

  // sgcl_entry as sent from a GateUpdate engine to GateUpdateControl:
  // the gate to write (gateID) and the value to write there
  typedef struct packed {
    logic [GATE_W-1:0] gate_id;
    sgcl_entry_t       entry;
  } sgcl_update_t;

  // Configuration word from the switch's management block
  typedef enum logic [1:0] {
    CFG_PGCL_ENTRY = 2'd0,  // write data[44:0] to entry addr of period-wise GCL uu
    CFG_PGCL_CYCLE = 2'd1,  // set the pGCL cycle period of UU uu to data[31:0]
    CFG_PGCL_LEN   = 2'd2   // set the number of valid entries of UU uu to data[10:0]
  } cfg_kind_e;

  typedef struct packed {
    logic                    valid;
    cfg_kind_e               kind;
    logic [2:0]              uu;
    logic [PGCL_AW-1:0]      addr;
    logic [$bits(pgcl_entry_t)-1:0] data;
  } cfg_t;

  // Descriptor field access
  function automatic logic [SID_W-1:0] desc_stream_id(input logic [DESC_W-1:0] d);
    return d[DESC_SID_LSB +: SID_W];
  endfunction

  function automatic logic [DESC_W-1:0] desc_police(input logic [DESC_W-1:0] d,
                                                    input logic discard,
                                                    input logic [QUE_W-1:0] qid);
    logic [DESC_W-1:0] r;
    r = d;
    r[DESC_QID_LSB +: QUE_W] = qid;
    r[DESC_DISCARD_BIT]      = discard;
    return r;
  endfunction

endpackage
