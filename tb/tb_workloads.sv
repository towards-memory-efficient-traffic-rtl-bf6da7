// tb_workloads: one port's FooDog at full size, run on the stream mixes of the
// memory evaluation and on the five-stream determinism scenario.
//
// Stream mixes: N streams with a period of 1 ms or 100 ms, a share of them at
// 1 ms. The cases run here are N = 100, 300 and 500 with 10 %, 50 % and 90 %
// at 1 ms, including the largest (500 streams, 90 % at 1 ms: 900 entries in
// the 1 ms list). One tick stands for 1 us, so the periods are 1000 and
// 100000 ticks, and a tick comes every 4 clocks. Each stream has one window
// (40 ticks at 1 ms, 400 ticks at 100 ms). Each case is reset, loaded over
// the configuration bus, and run for one whole 100 ms network cycle with
// random descriptors. Every frame not within 16 ticks of an edge of its
// window is checked against the window table.
//
// Determinism scenario: five streams f0..f4, all of 1 ms period, each
// sending one frame in the middle of its window every period. From 24 ms on,
// f0 sends a quarter period early. Over 120 ms every frame of f1..f4 must pass
// with its planned queue, and every frame of f0 after 24 ms must be dropped.
module tb_workloads;
  import foodog_pkg::*;

  localparam int unsigned NS = DEF_N_STREAMS;
  localparam int unsigned TICK = 4;
  localparam int unsigned GUARD = 16;

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
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned period [2] = '{1000, 100000};
  int unsigned width  [2] = '{40, 400};

  int unsigned n_streams;
  bit          valid_g [NS];
  int unsigned w_uu    [NS];
  int unsigned w_open  [NS];
  int unsigned w_close [NS];
  int unsigned w_q     [NS];

  function automatic logic [44:0] ent(input int unsigned t, input int unsigned g,
                                      input bit s, input int unsigned q);
    pgcl_entry_t e;
    e.update_time = t; e.gate_id = GATE_W'(g); e.gate_state = s; e.queue_id = QUE_W'(q);
    return e;
  endfunction

  task automatic cfg_write(input cfg_kind_e kind, input int unsigned uu,
                           input int unsigned addr, input logic [44:0] data);
    cfg.valid = 1'b1; cfg.kind = kind; cfg.uu = 3'(uu); cfg.addr = PGCL_AW'(addr); cfg.data = data;
    @(negedge clk);
    cfg = '0;
  endtask

  // windows of n streams in unit u, placed at a regular spacing, merged into
  // one sorted list and loaded
  task automatic load_unit(input int unsigned u, input int unsigned n, inout int unsigned k);
    int unsigned s, io, ic, a, gates [NS];
    if (n == 0) begin
      cfg_write(CFG_PGCL_LEN, u, 0, 45'd0);
      return;
    end
    s = (period[u] * 3 / 4) / n;
    if (s == 0) s = 1;
    for (int i = 0; i < n; i++) begin
      int unsigned g;
      g = (7 * k + 3) % n_streams;
      k++;
      gates[i]   = g;
      valid_g[g] = 1;
      w_uu[g]    = u;
      w_open[g]  = 1 + s * i;
      w_close[g] = w_open[g] + width[u];
      w_q[g]     = g % 8;
    end
    io = 0; ic = 0; a = 0;
    while (io < n || ic < n) begin
      if (io < n && (ic >= n || w_open[gates[io]] <= w_close[gates[ic]])) begin
        cfg_write(CFG_PGCL_ENTRY, u, a, ent(w_open[gates[io]], gates[io], GATE_OPEN, w_q[gates[io]]));
        io++;
      end else begin
        cfg_write(CFG_PGCL_ENTRY, u, a, ent(w_close[gates[ic]], gates[ic], GATE_CLOSED, 0));
        ic++;
      end
      a++;
    end
    check(a <= DEF_PGCL_DEPTH, $sformatf("list of unit %0d needs %0d entries", u, a));
    cfg_write(CFG_PGCL_CYCLE, u, 0, 45'(period[u]));
    cfg_write(CFG_PGCL_LEN, u, 0, 45'(a));
  endtask

  task automatic reset_and_load(input int unsigned n, input int unsigned pct_1ms);
    int unsigned k, n1;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!init_done) @(negedge clk);
    for (int g = 0; g < NS; g++) valid_g[g] = 0;
    n_streams = n;
    n1 = n * pct_1ms / 100;
    k = 0;
    load_unit(0, n1, k);
    load_unit(1, n - n1, k);
  endtask

  function automatic bit gate_open(input int unsigned g, input longint unsigned tm, output bit near);
    int unsigned x, d_o, d_c, p;
    p = period[w_uu[g]];
    x = 32'(tm % p);
    d_o = (x >= w_open[g])  ? x - w_open[g]  : w_open[g] - x;
    d_c = (x >= w_close[g]) ? x - w_close[g] : w_close[g] - x;
    near = (d_o < GUARD) || (d_c < GUARD);
    return (x >= w_open[g]) && (x < w_close[g]);
  endfunction

  typedef struct {
    logic [DESC_W-1:0] d;
    bit checked;
    int kind;  // 0 random, 1 on-time frame of f1..f4, 2 shifted frame of f0
  } exp_t;
  exp_t expq [$];
  exp_t e;
  int n_pass, n_drop, n_ontime_pass, n_ontime_sent, n_shift_drop, n_shift_sent;

  // run ticks of time, with random traffic or the determinism traffic
  task automatic run(input int unsigned ticks_to_run, input bit scenario);
    longint unsigned t;
    int phase;
    t = 0; phase = 0;
    for (longint unsigned c = 0; c < longint'(ticks_to_run) * TICK + 4; c++) begin
      if (desc_out_valid) begin
        e = expq.pop_front();
        if (e.checked) begin
          check(desc_out == e.d,
                $sformatf("t=%0d sid %0d: discard %0b q %0d, exp discard %0b q %0d", t,
                desc_out[DESC_SID_LSB +: SID_W], desc_out[DESC_DISCARD_BIT], desc_out[DESC_QID_LSB +: QUE_W],
                e.d[DESC_DISCARD_BIT], e.d[DESC_QID_LSB +: QUE_W]));
          if (desc_out[DESC_DISCARD_BIT]) n_drop++; else n_pass++;
          if (e.kind == 1 && !desc_out[DESC_DISCARD_BIT]) n_ontime_pass++;
          if (e.kind == 2 && desc_out[DESC_DISCARD_BIT]) n_shift_drop++;
        end
      end
      ncs = (c == 0);
      time_tick = (c > 0) && (phase == TICK - 1);
      desc_in_valid = 1'b0;
      desc_in = {$urandom, $urandom};
      e.kind = 0;
      if (c > 0 && !scenario) begin
        desc_in_valid = 1'($urandom);
        desc_in[DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(0, n_streams - 1));
      end else if (c > 0 && phase == 0) begin
        // the five streams send one frame each per period, in mid-window
        for (int g = 0; g < 5; g++) begin
          int unsigned mid, x;
          x = 32'(t % period[0]);
          mid = (w_open[g] + w_close[g]) / 2;
          if (g == 0 && t >= 24 * period[0]) mid = (mid + 750) % period[0];
          if (x == mid) begin
            desc_in_valid = 1'b1;
            desc_in[DESC_SID_LSB +: SID_W] = SID_W'(g);
            e.kind = (g == 0 && t >= 24 * period[0]) ? 2 : 1;
            if (e.kind == 1) n_ontime_sent++; else n_shift_sent++;
          end
        end
      end
      if (desc_in_valid) begin
        bit open, near;
        int unsigned sid;
        sid = desc_in[DESC_SID_LSB +: SID_W];
        open = gate_open(sid, t, near);
        e.d = desc_in;
        e.d[DESC_DISCARD_BIT] = !open;
        e.d[DESC_QID_LSB +: QUE_W] = open ? QUE_W'(w_q[sid]) : '0;
        e.checked = !near;
        expq.push_back(e);
      end
      @(negedge clk);
      if (c > 0) begin
        if (time_tick) t++;
        phase = (phase + 1) % TICK;
      end
    end
    desc_in_valid = 1'b0;
    repeat (4) @(negedge clk);
    expq.delete();
  endtask

  int unsigned mix_n   [5] = '{100, 100, 300, 500, 500};
  int unsigned mix_pct [5] = '{10, 90, 50, 10, 90};

  initial begin
    for (int m = 0; m < 5; m++) begin
      n_pass = 0; n_drop = 0;
      reset_and_load(mix_n[m], mix_pct[m]);
      run(period[1], 1'b0);
      $display("mix %0d streams, %0d%% at 1 ms: pass %0d drop %0d", mix_n[m], mix_pct[m], n_pass, n_drop);
      check(n_pass > 0 && n_drop > 0, "frames passed and dropped in the mix");
    end
    // determinism scenario: five 1 ms streams, f0 drifts at 24 ms
    n_ontime_pass = 0; n_ontime_sent = 0; n_shift_drop = 0; n_shift_sent = 0;
    reset_and_load(5, 100);
    run(120 * period[0], 1'b1);
    $display("five streams: on time %0d of %0d passed, shifted f0 %0d of %0d dropped",
             n_ontime_pass, n_ontime_sent, n_shift_drop, n_shift_sent);
    check(n_ontime_sent == 24 + 4 * 120, "on-time frames sent: f0 for 24 ms, f1..f4 for 120 ms");
    check(n_ontime_pass == n_ontime_sent, "every on-time frame passed");
    check(n_shift_sent > 90 && n_shift_drop == n_shift_sent, "every shifted frame of f0 dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
