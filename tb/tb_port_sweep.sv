// tb_port_sweep: the policing stage built for 16 ports, the largest port
// count of the memory sweep, each port loaded with the largest stream mix of
// that sweep: 500 streams, 90 % of them with a period of 1 ms and the rest
// with 100 ms.
//
// One tick stands for 1 us and comes every 4 clocks, so the periods are 1000
// and 100000 ticks. Per port the 450 streams of 1 ms get windows of 40 ticks
// (900 entries in one list) and the 50 streams of 100 ms windows of 400
// ticks, all within the first 3.5 ms. Window positions and the gate of each
// stream differ from port to port, so a configuration word that reached the
// wrong port would show. The run covers 5 ms: five repetitions of the 1 ms
// list and the whole part of the 100 ms list that holds windows.
//
// Every port receives random descriptors, about half the clocks, with
// streamIDs 0..511 (the ones from 500 up have no gate and must pass
// unchanged). The expected result follows from the window table alone; a
// frame within 16 ticks of an edge of its window is not checked. Counted, and
// each must occur: frames passed, dropped and bypassed, on every port, and
// frames of 1 ms streams passed in a repeated list cycle.
module tb_port_sweep;
  import foodog_pkg::*;

  localparam int unsigned NP = 16;
  localparam int unsigned NS = DEF_N_STREAMS;
  localparam int unsigned TICK = 4;
  localparam int unsigned GUARD = 16;
  localparam int unsigned RUN_TICKS = 5000;

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

  foodog_switch_policing #(.NUM_PORTS(NP)) dut (
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

  int unsigned period [2] = '{1000, 100000};
  int unsigned width  [2] = '{40, 400};
  int unsigned n_uu   [2] = '{450, 50};
  int unsigned span   [2] = '{450, 3000};

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

  // windows of one port, merged per unit into a sorted list and loaded
  task automatic configure_port(input int unsigned p);
    int unsigned k, gates [NS];
    k = 0;
    for (int u = 0; u < 2; u++) begin
      int unsigned n, s, off, io, ic, a;
      n = n_uu[u];
      s = span[u] / n;
      off = 7 * p;
      for (int i = 0; i < n; i++) begin
        int unsigned g;
        g = (7 * k + 31 * p) % NS;
        k++;
        gates[i] = g;
        w_uu[p][g]    = u;
        w_open[p][g]  = 1 + s * i + off;
        w_close[p][g] = w_open[p][g] + width[u];
        w_q[p][g]     = (g + p) % 8;
      end
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
      check(a == 2 * n && a <= DEF_PGCL_DEPTH, "list length");
      cfg_write(p, CFG_PGCL_CYCLE, u, 0, 45'(period[u]));
      cfg_write(p, CFG_PGCL_LEN, u, 0, 45'(a));
    end
  endtask

  function automatic bit gate_open(input int unsigned p, input int unsigned g,
                                   input longint unsigned tm, output bit near);
    int unsigned x, d_o, d_c;
    x = 32'(tm % period[w_uu[p][g]]);
    d_o = (x >= w_open[p][g])  ? x - w_open[p][g]  : w_open[p][g] - x;
    d_c = (x >= w_close[p][g]) ? x - w_close[p][g] : w_close[p][g] - x;
    near = (d_o < GUARD) || (d_c < GUARD);
    return (x >= w_open[p][g]) && (x < w_close[p][g]);
  endfunction

  typedef struct {
    logic [DESC_W-1:0] d;
    bit checked;
    bit bypass;
    bit replay;
  } exp_t;
  exp_t expq [NP][$];
  exp_t e;

  int n_pass [NP];
  int n_drop [NP];
  int n_bypass [NP];
  int n_replay;

  initial begin
    longint unsigned t;
    int phase;
    for (int p = 0; p < NP; p++) begin
      n_pass[p] = 0; n_drop[p] = 0; n_bypass[p] = 0;
    end
    n_replay = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!init_done) @(negedge clk);
    for (int p = 0; p < NP; p++) configure_port(p);
    t = 0; phase = 0;
    for (longint unsigned c = 0; c < longint'(RUN_TICKS) * TICK + 4; c++) begin
      for (int p = 0; p < NP; p++) begin
        if (desc_out_valid[p]) begin
          check(expq[p].size() > 0, "output without input");
          e = expq[p].pop_front();
          if (e.checked) begin
            check(desc_out[p] == e.d && desc_out_bypass[p] == e.bypass,
                  $sformatf("port %0d t=%0d sid %0d: discard %0b q %0d, exp discard %0b q %0d", p, t,
                  desc_out[p][DESC_SID_LSB +: SID_W], desc_out[p][DESC_DISCARD_BIT],
                  desc_out[p][DESC_QID_LSB +: QUE_W], e.d[DESC_DISCARD_BIT], e.d[DESC_QID_LSB +: QUE_W]));
            if (e.bypass) n_bypass[p]++;
            else if (desc_out[p][DESC_DISCARD_BIT]) n_drop[p]++;
            else begin
              n_pass[p]++;
              if (e.replay) n_replay++;
            end
          end
        end
      end
      ncs = (c == 0);
      time_tick = (c > 0) && (phase == TICK - 1);
      for (int p = 0; p < NP; p++) begin
        desc_in_valid[p] = (c > 0) && (c < longint'(RUN_TICKS) * TICK) && 1'($urandom);
        desc_in[p] = {$urandom, $urandom};
        desc_in[p][DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(0, 511));
        if (desc_in_valid[p]) begin
          int unsigned sid;
          bit open, near;
          sid = desc_in[p][DESC_SID_LSB +: SID_W];
          e.d = desc_in[p];
          e.checked = 1; e.bypass = 0; e.replay = 0;
          if (sid >= NS) begin
            e.bypass = 1;
          end else begin
            open = gate_open(p, sid, t, near);
            e.checked = !near;
            e.d[DESC_DISCARD_BIT] = !open;
            e.d[DESC_QID_LSB +: QUE_W] = open ? QUE_W'(w_q[p][sid]) : '0;
            e.replay = (w_uu[p][sid] == 0) && (t >= period[0]);
          end
          expq[p].push_back(e);
        end
      end
      @(negedge clk);
      if (c > 0) begin
        if (time_tick) t++;
        phase = (phase + 1) % TICK;
      end
    end
    desc_in_valid = '0;
    repeat (4) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      check(expq[p].size() == 0, $sformatf("port %0d: descriptors lost", p));
      check(n_pass[p] > 0, $sformatf("port %0d: no frame passed", p));
      check(n_drop[p] > 0, $sformatf("port %0d: no frame dropped", p));
      check(n_bypass[p] > 0, $sformatf("port %0d: no descriptor bypassed", p));
    end
    check(n_replay > 0, "no frame passed in a repeated 1 ms list cycle");
    $display("16 ports: port 0 pass %0d drop %0d bypass %0d; port 15 pass %0d drop %0d bypass %0d; replay passes %0d",
             n_pass[0], n_drop[0], n_bypass[0], n_pass[15], n_drop[15], n_bypass[15], n_replay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
