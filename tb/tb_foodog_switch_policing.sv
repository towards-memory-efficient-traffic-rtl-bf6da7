// tb_foodog_switch_policing: end-to-end test of the four-port policing stage
// at its full size (4 ports, 8 update units of 1000 entries, 500 gates per
// port), run through one whole network cycle and into the next.
//
// Every port gets 500 streams spread over eight periods (1000, 2000, 2500,
// 4000, 5000, 10000, 20000 and 25000 ticks, so the network cycle is 100000
// ticks): 200, 100, 50, 50, 30, 30, 20 and 20 streams, one arrival window per
// stream and period, placed differently on each port and mapped to gates by a
// per-port permutation. The testbench builds each update unit's sorted
// period-wise GCL (two entries per stream) and loads it over the
// configuration bus. One tick per clock.
//
// Each port then receives random descriptors: streams with a gate, and
// streamIDs without one. The expected result follows from the window table
// alone (open while time mod period lies in [open, close)); a frame within
// 16 ticks of a window edge of its stream is not checked. In addition, on
// port 0 one "normal" stream sends a frame in the middle of its window in
// every period, and a "faulty" stream does the same until tick 30000 and is
// then shifted by half a period, like a drifting sender: its frames must then
// be dropped while the normal stream is unaffected.
//
// Mechanisms counted, each of which must occur: frames passed, frames
// discarded, descriptors bypassed (no gate), update units held back by
// GateUpdateControl because another unit was written in that clock, frames
// passed in a repeated pGCL cycle (the list replay), frames passed after the
// second network_cycle_start, shifted frames dropped.
module tb_foodog_switch_policing;
  import foodog_pkg::*;

  localparam int unsigned NP = DEF_NUM_PORTS;
  localparam int unsigned NU = DEF_NUM_UU;
  localparam int unsigned NS = DEF_N_STREAMS;
  localparam int unsigned NET_CYCLE = 100000;
  localparam int unsigned GUARD = 16;

  logic                      clk = 1'b0;
  logic                      rst_n = 1'b0;
  logic                      ncs = 1'b0;
  logic                      time_tick = 1'b0;
  logic [7:0]                cfg_port = '0;
  cfg_t                      cfg = '0;
  logic [NP-1:0]             desc_in_valid = '0;
  logic [NP-1:0][DESC_W-1:0] desc_in = '0;
  logic [NP-1:0]             desc_out_valid;
  logic [NP-1:0][DESC_W-1:0] desc_out;
  logic [NP-1:0]             desc_out_bypass;
  logic                      init_done;

  int checks = 0;
  int failures = 0;

  foodog_switch_policing dut (
    .clk, .rst_n, .network_cycle_start(ncs), .time_tick, .cfg_port, .cfg,
    .desc_in_valid, .desc_in, .desc_out_valid, .desc_out, .desc_out_bypass, .init_done
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned period   [NU] = '{1000, 2000, 2500, 4000, 5000, 10000, 20000, 25000};
  int unsigned n_in_uu  [NU] = '{200, 100, 50, 50, 30, 30, 20, 20};

  // window table, per port and gate
  int unsigned w_uu    [NP][NS];
  int unsigned w_open  [NP][NS];
  int unsigned w_close [NP][NS];
  int unsigned w_q     [NP][NS];

  function automatic logic [44:0] ent(input int unsigned t, input int unsigned g,
                                      input bit s, input int unsigned q);
    pgcl_entry_t e;
    e.update_time = t; e.gate_id = GATE_W'(g); e.gate_state = s; e.queue_id = QUE_W'(q);
    return e;
  endfunction

  task automatic cfg_write(input int unsigned port, input cfg_kind_e kind, input int unsigned uu,
                           input int unsigned addr, input logic [44:0] data);
    cfg_port = 8'(port);
    cfg.valid = 1'b1; cfg.kind = kind; cfg.uu = 3'(uu); cfg.addr = PGCL_AW'(addr); cfg.data = data;
    @(negedge clk);
    cfg = '0;
  endtask

  // build the windows of one port and load its period-wise GCLs
  task automatic configure_port(input int unsigned p);
    int unsigned k, gates [200];
    k = 0;
    for (int u = 0; u < NU; u++) begin
      int unsigned n, s, w, off, io, ic, a;
      n = n_in_uu[u];
      s = (period[u] * 3 / 4) / n;
      w = period[u] / 10;
      off = (p * s) / 4;
      for (int i = 0; i < n; i++) begin
        int unsigned g;
        g = (7 * k + 13 * p) % NS;
        k++;
        gates[i] = g;
        w_uu[p][g]    = u;
        w_open[p][g]  = 1 + s * i + off;
        w_close[p][g] = w_open[p][g] + w;
        w_q[p][g]     = (g + p) % 8;
      end
      // merge the sorted opening and closing edges into one sorted list
      io = 0; ic = 0; a = 0;
      while (io < n || ic < n) begin
        if (io < n && (ic >= n || w_open[p][gates[io]] <= w_close[p][gates[ic]])) begin
          cfg_write(p, CFG_PGCL_ENTRY, u, a, ent(w_open[p][gates[io]], gates[io], GATE_OPEN, w_q[p][gates[io]]));
          io++;
        end else begin
          cfg_write(p, CFG_PGCL_ENTRY, u, a, ent(w_close[p][gates[ic]], gates[ic], GATE_CLOSED, 0));
          ic++;
        end
        a++;
      end
      cfg_write(p, CFG_PGCL_CYCLE, u, 0, 45'(period[u]));
      cfg_write(p, CFG_PGCL_LEN, u, 0, 45'(2 * n));
    end
  endtask

  typedef struct {
    logic [DESC_W-1:0] d;
    bit checked;
    bit replay;
    bit second;
    int kind;   // 0 random, 1 normal stream, 2 faulty stream after its shift
  } exp_t;
  exp_t expq [NP][$];
  exp_t e;

  longint unsigned t;        // ticks since the latest network_cycle_start
  int              ncs_seen;
  int unsigned     normal_g, faulty_g;
  int n_pass, n_drop, n_bypass, n_unchecked, n_held, n_replay, n_second;
  int n_normal_pass, n_faulty_drop, n_faulty_sent, n_normal_sent;

  function automatic bit gate_open(input int unsigned p, input int unsigned g,
                                   input longint unsigned tm, output bit near_edge);
    int unsigned u, x, dopen, dclose;
    u = w_uu[p][g];
    x = 32'(tm % period[u]);
    dopen  = (x >= w_open[p][g])  ? x - w_open[p][g]  : w_open[p][g] - x;
    dclose = (x >= w_close[p][g]) ? x - w_close[p][g] : w_close[p][g] - x;
    near_edge = (dopen < GUARD) || (dclose < GUARD) || (x < GUARD) || (x + GUARD > period[u]);
    return (x >= w_open[p][g]) && (x < w_close[p][g]);
  endfunction

  function automatic exp_t make_exp(input int unsigned p, input logic [DESC_W-1:0] d);
    exp_t r;
    int unsigned sid;
    bit open, near;
    sid = d[DESC_SID_LSB +: SID_W];
    r.d = d; r.checked = 1; r.replay = 0; r.second = (ncs_seen > 1); r.kind = 0;
    if (sid < NS) begin
      open = (ncs_seen > 0) && gate_open(p, sid, t, near);
      if (ncs_seen > 0 && near) r.checked = 0;
      r.d[DESC_DISCARD_BIT] = !open;
      r.d[DESC_QID_LSB +: QUE_W] = open ? QUE_W'(w_q[p][sid]) : '0;
      r.replay = (ncs_seen > 0) && (t >= period[w_uu[p][sid]]);
    end
    return r;
  endfunction

  // count update units kept waiting by GateUpdateControl
  always @(posedge clk) begin
    if ((dut.g_port[0].u_foodog.uu_valid & ~dut.g_port[0].u_foodog.uu_ready) != '0) n_held++;
  end

  initial begin
    n_pass = 0; n_drop = 0; n_bypass = 0; n_unchecked = 0; n_held = 0; n_replay = 0; n_second = 0;
    n_normal_pass = 0; n_faulty_drop = 0; n_faulty_sent = 0; n_normal_sent = 0;
    t = 0; ncs_seen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!init_done) @(negedge clk);
    for (int p = 0; p < NP; p++) configure_port(p);
    // the normal and the faulty stream: two gates of the 1000-tick unit on port 0
    normal_g = (7 * 10) % NS;
    faulty_g = (7 * 11) % NS;
    check(w_uu[0][normal_g] == 0 && w_uu[0][faulty_g] == 0, "stream choice");
    for (int k = 0; k < NET_CYCLE + 20000 + 2; k++) begin
      // outputs of the clock that just ended
      for (int p = 0; p < NP; p++) begin
        if (desc_out_valid[p]) begin
          check(expq[p].size() > 0, "output without input");
          e = expq[p].pop_front();
          if (e.checked) begin
            check(desc_out[p] == e.d,
                  $sformatf("port %0d t=%0d sid %0d: discard %0b q %0d, exp discard %0b q %0d", p, t,
                  desc_out[p][DESC_SID_LSB +: SID_W], desc_out[p][DESC_DISCARD_BIT],
                  desc_out[p][DESC_QID_LSB +: QUE_W], e.d[DESC_DISCARD_BIT], e.d[DESC_QID_LSB +: QUE_W]));
            check(desc_out_bypass[p] == (e.d[DESC_SID_LSB +: SID_W] >= NS), "bypass flag");
            if (desc_out_bypass[p]) n_bypass++;
            else if (desc_out[p][DESC_DISCARD_BIT]) n_drop++;
            else begin
              n_pass++;
              if (e.replay) n_replay++;
              if (e.second) n_second++;
            end
            if (e.kind == 1 && !desc_out[p][DESC_DISCARD_BIT]) n_normal_pass++;
            if (e.kind == 2 && desc_out[p][DESC_DISCARD_BIT]) n_faulty_drop++;
          end else n_unchecked++;
        end
      end
      // stimulus for the next clock
      ncs = (k == 0) || (k == NET_CYCLE + 1);
      time_tick = 1'b1;
      for (int p = 0; p < NP; p++) begin
        logic [DESC_W-1:0] d;
        int kind;
        kind = 0;
        d = {$urandom, $urandom};
        if ($urandom_range(0, 19) == 0) d[DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(NS, 16383));
        else d[DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(0, NS - 1));
        desc_in_valid[p] = 1'($urandom_range(0, 1));
        if (p == 0 && ncs_seen > 0) begin
          int unsigned x, mid;
          x = 32'(t % period[0]);
          mid = (w_open[0][normal_g] + w_close[0][normal_g]) / 2;
          if (x == mid) begin
            desc_in_valid[p] = 1'b1; d[DESC_SID_LSB +: SID_W] = SID_W'(normal_g); kind = 1;
            n_normal_sent++;
          end
          mid = (w_open[0][faulty_g] + w_close[0][faulty_g]) / 2;
          if (t >= 30000 && ncs_seen == 1) mid = (mid + period[0] / 2) % period[0];
          if (x == mid) begin
            desc_in_valid[p] = 1'b1; d[DESC_SID_LSB +: SID_W] = SID_W'(faulty_g);
            kind = (t >= 30000 && ncs_seen == 1) ? 2 : 1;
            if (kind == 2) n_faulty_sent++; else n_normal_sent++;
          end
        end
        desc_in[p] = d;
        if (desc_in_valid[p]) begin
          e = make_exp(p, d);
          e.kind = kind;
          expq[p].push_back(e);
        end
      end
      @(negedge clk);
      if (ncs) begin t = 0; ncs_seen++; end
      else if (ncs_seen > 0) t++;
    end
    $display("pass %0d drop %0d bypass %0d unchecked %0d held %0d replay %0d second %0d",
             n_pass, n_drop, n_bypass, n_unchecked, n_held, n_replay, n_second);
    $display("normal sent %0d passed %0d, faulty sent %0d dropped %0d",
             n_normal_sent, n_normal_pass, n_faulty_sent, n_faulty_drop);
    check(n_pass > 0,    "mechanism: frame passed");
    check(n_drop > 0,    "mechanism: frame discarded");
    check(n_bypass > 0,  "mechanism: descriptor without gate bypassed");
    check(n_held > 0,    "mechanism: update unit held by GateUpdateControl");
    check(n_replay > 0,  "mechanism: frame passed in a replayed pGCL cycle");
    check(n_second > 0,  "mechanism: frame passed after a new network cycle start");
    check(n_faulty_sent > 0 && n_faulty_drop == n_faulty_sent, "mechanism: every shifted frame dropped");
    check(n_normal_sent > 0 && n_normal_pass == n_normal_sent, "every in-window frame of the normal streams passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
