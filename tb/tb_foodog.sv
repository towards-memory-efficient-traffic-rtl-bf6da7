// tb_foodog: self-checking test of one port's FooDog, on the worked example
// of the overview figure.
//
// Update unit 0 holds the 1 ms list (gate 0 opens at 5 to queue 1, gate 2
// opens at 8 to queue 0, gate 2 closes at 13, gate 0 closes at 14) and unit 1
// the 100 ms list (gate 1 opens at 6 to queue 0, closes at 13). The pGCL
// cycle periods are 20 and 2000 ticks, keeping the 1:100 ratio, and a tick
// comes every 8 clocks. Both lists have an entry at time 13, so
// GateUpdateControl must serialise two writes there.
//
// Descriptors for gates 0, 1, 2, other gates and streamIDs without a gate
// arrive at random. The expected result comes from the window table alone:
// a gate is open while (time mod period) lies in [open, close). Frames
// presented within 4 clocks after a tick are not checked, as the new state
// needs a few clocks to reach the stream-wise GCL. Before network_cycle_start
// all gates must be closed.
module tb_foodog;
  import foodog_pkg::*;

  localparam int unsigned TICK = 8;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              ncs = 1'b0;
  logic              time_tick = 1'b0;
  cfg_t              cfg = '0;
  logic              desc_in_valid = 1'b0;
  logic [DESC_W-1:0] desc_in = '0;
  logic              desc_out_valid;
  logic [DESC_W-1:0] desc_out;
  logic              desc_out_bypass;
  logic              init_done;

  int checks = 0;
  int failures = 0;

  foodog dut (
    .clk, .rst_n, .network_cycle_start(ncs), .time_tick, .cfg,
    .desc_in_valid, .desc_in, .desc_out_valid, .desc_out, .desc_out_bypass, .init_done
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // window table of the example: gate, period, open, close, queue
  typedef struct { int unsigned period, open_t, close_t, q; } win_t;
  win_t win [3];

  task automatic cfg_write(input cfg_kind_e kind, input int unsigned uu,
                           input int unsigned addr, input logic [44:0] data);
    cfg.valid = 1'b1; cfg.kind = kind; cfg.uu = 3'(uu); cfg.addr = PGCL_AW'(addr); cfg.data = data;
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic logic [44:0] ent(input int unsigned t, input int unsigned g,
                                      input bit s, input int unsigned q);
    pgcl_entry_t e;
    e.update_time = t; e.gate_id = GATE_W'(g); e.gate_state = s; e.queue_id = QUE_W'(q);
    return e;
  endfunction

  typedef struct {
    logic [DESC_W-1:0] d;
    bit checked;
  } exp_t;
  exp_t expq [$];
  exp_t e;
  bit   started;
  longint unsigned ticks;
  int   phase;
  int   n_pass, n_drop, n_bypass, n_unchecked;
  int   init_clocks;

  function automatic logic [DESC_W-1:0] expected(input logic [DESC_W-1:0] d);
    logic [DESC_W-1:0] r;
    int unsigned sid, tm;
    bit open;
    int unsigned q;
    sid = d[DESC_SID_LSB +: SID_W];
    r = d;
    if (sid >= DEF_N_STREAMS) return r;
    open = 0; q = 0;
    if (started && sid < 3) begin
      tm = 32'(ticks % win[sid].period);
      open = (tm >= win[sid].open_t) && (tm < win[sid].close_t);
      q = open ? win[sid].q : 0;
    end
    r[DESC_DISCARD_BIT] = !open;
    r[DESC_QID_LSB +: QUE_W] = QUE_W'(q);
    return r;
  endfunction

  initial begin
    win[0] = '{period: 20,   open_t: 5, close_t: 14, q: 1};
    win[1] = '{period: 2000, open_t: 6, close_t: 13, q: 0};
    win[2] = '{period: 20,   open_t: 8, close_t: 13, q: 0};
    n_pass = 0; n_drop = 0; n_bypass = 0; n_unchecked = 0;
    started = 0; ticks = 0; phase = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    init_clocks = 0;
    while (!init_done) begin @(negedge clk); init_clocks++; end
    check(init_clocks == DEF_N_STREAMS, $sformatf("init %0d clocks", init_clocks));
    // configuration
    cfg_write(CFG_PGCL_ENTRY, 0, 0, ent(5, 0, GATE_OPEN, 1));
    cfg_write(CFG_PGCL_ENTRY, 0, 1, ent(8, 2, GATE_OPEN, 0));
    cfg_write(CFG_PGCL_ENTRY, 0, 2, ent(13, 2, GATE_CLOSED, 0));
    cfg_write(CFG_PGCL_ENTRY, 0, 3, ent(14, 0, GATE_CLOSED, 0));
    cfg_write(CFG_PGCL_ENTRY, 1, 0, ent(6, 1, GATE_OPEN, 0));
    cfg_write(CFG_PGCL_ENTRY, 1, 1, ent(13, 1, GATE_CLOSED, 0));
    cfg_write(CFG_PGCL_CYCLE, 0, 0, 45'd20);
    cfg_write(CFG_PGCL_CYCLE, 1, 0, 45'd2000);
    cfg_write(CFG_PGCL_LEN, 0, 0, 45'd4);
    cfg_write(CFG_PGCL_LEN, 1, 0, 45'd2);
    for (int k = 0; k < 2 * 2000 * TICK + 400; k++) begin
      // collect the output of the clock that just ended
      if (desc_out_valid) begin
        check(expq.size() > 0, "output without input");
        e = expq.pop_front();
        if (e.checked) begin
          check(desc_out == e.d, $sformatf("k=%0d sid %0d: got discard=%0b q=%0d exp discard=%0b q=%0d",
                k, desc_out[DESC_SID_LSB +: SID_W], desc_out[DESC_DISCARD_BIT],
                desc_out[DESC_QID_LSB +: QUE_W], e.d[DESC_DISCARD_BIT], e.d[DESC_QID_LSB +: QUE_W]));
          check(desc_out_bypass == (e.d[DESC_SID_LSB +: SID_W] >= DEF_N_STREAMS), "bypass flag");
          if (desc_out_bypass) n_bypass++;
          else if (desc_out[DESC_DISCARD_BIT]) n_drop++;
          else n_pass++;
        end else n_unchecked++;
      end
      // stimulus for the next clock
      ncs = (k == 200);
      time_tick = started && (phase == TICK - 1);
      desc_in_valid = 1'($urandom_range(0, 3) != 0);
      desc_in = {$urandom, $urandom};
      case ($urandom_range(0, 9))
        0, 1, 2: desc_in[DESC_SID_LSB +: SID_W] = 0;
        3, 4:    desc_in[DESC_SID_LSB +: SID_W] = 1;
        5, 6, 7: desc_in[DESC_SID_LSB +: SID_W] = 2;
        8:       desc_in[DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(3, 499));
        default: desc_in[DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(500, 16383));
      endcase
      if (desc_in_valid) begin
        e.d = expected(desc_in);
        e.checked = !started || (phase >= 4 && phase < TICK - 1) || (desc_in[DESC_SID_LSB +: SID_W] >= 3);
        expq.push_back(e);
      end
      @(negedge clk);
      // time model: the DUT's time changes at the clock edge just passed
      if (ncs) begin started = 1; ticks = 0; phase = 0; end
      else if (started) begin
        if (time_tick) ticks++;
        phase = (phase + 1) % TICK;
      end
    end
    check(n_pass > 100 && n_drop > 100 && n_bypass > 10,
          $sformatf("pass %0d drop %0d bypass %0d", n_pass, n_drop, n_bypass));
    $display("pass %0d drop %0d bypass %0d unchecked %0d", n_pass, n_drop, n_bypass, n_unchecked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
