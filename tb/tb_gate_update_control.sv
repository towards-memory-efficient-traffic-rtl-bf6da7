// tb_gate_update_control: self-checking test of GateUpdateControl.
//
// Eight requesters offer entries under a valid-ready handshake. Checked in
// every clock: at most one ready, only to a valid requester; the granted entry
// appears on the stream-wise GCL write port in the next clock with its gateID
// as address; every offered entry is written exactly once; with all eight
// requesters busy the grants rotate 0,1,...,7 (one write per clock, the rate);
// with wr_allow low nothing is granted or written.
module tb_gate_update_control;
  import foodog_pkg::*;

  localparam int unsigned NUM_UU = DEF_NUM_UU;

  logic                      clk = 1'b0;
  logic                      rst_n = 1'b0;
  sgcl_update_t [NUM_UU-1:0] req_entry;
  logic [NUM_UU-1:0]         req_valid;
  logic [NUM_UU-1:0]         req_ready;
  logic                      wr_allow = 1'b0;
  logic                      sgcl_wr_en;
  logic [GATE_W-1:0]         sgcl_wr_addr;
  sgcl_entry_t               sgcl_wr_data;

  int checks = 0;
  int failures = 0;

  gate_update_control dut (
    .clk, .rst_n, .req_entry, .req_valid, .req_ready, .wr_allow,
    .sgcl_wr_en, .sgcl_wr_addr, .sgcl_wr_data
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sgcl_update_t pending [NUM_UU][$];
  sgcl_update_t exp_wr;
  int           offered;
  int           written;
  int           last_grant;
  int           grant_idx;
  int           nready;

  function automatic sgcl_update_t rand_upd();
    sgcl_update_t u;
    u.gate_id = GATE_W'($urandom_range(0, 499));
    u.entry.gate_state = 1'($urandom);
    u.entry.queue_id = QUE_W'($urandom);
    return u;
  endfunction

  always_comb begin
    for (int u = 0; u < NUM_UU; u++) begin
      req_valid[u] = pending[u].size() > 0;
      req_entry[u] = req_valid[u] ? pending[u][0] : '0;
    end
  end

  task automatic step(input int load_pct, input bit check_rr);
    // new offers
    for (int u = 0; u < NUM_UU; u++)
      if ($urandom_range(0, 99) < load_pct) begin
        pending[u].push_back(rand_upd());
        offered++;
      end
    #1;
    nready = 0; grant_idx = -1;
    for (int u = 0; u < NUM_UU; u++) begin
      if (req_ready[u]) begin
        nready++; grant_idx = u;
        exp_wr = pending[u][0];
        check(req_valid[u], "ready to a requester without an entry");
      end
    end
    check(nready <= 1, "more than one ready");
    if (!wr_allow) check(nready == 0, "grant while writes are held off");
    if (wr_allow && req_valid != '0) check(nready == 1, "work pending but no grant");
    if (check_rr && grant_idx >= 0)
      check(grant_idx == (last_grant + 1) % NUM_UU,
            $sformatf("round robin: grant %0d after %0d", grant_idx, last_grant));
    @(posedge clk);
    #1;
    if (grant_idx >= 0) void'(pending[grant_idx].pop_front());
    @(negedge clk);
    // write port shows the entry granted in the previous clock
    check(sgcl_wr_en == (grant_idx >= 0), "write enable");
    if (grant_idx >= 0) begin
      check(sgcl_wr_addr == exp_wr.gate_id && sgcl_wr_data == exp_wr.entry, "write content");
      written++;
    end
  endtask

  initial begin
    offered = 0; written = 0; last_grant = NUM_UU - 1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // held off: nothing granted
    for (int k = 0; k < 20; k++) begin
      for (int u = 0; u < NUM_UU; u++) begin
        if (pending[u].size() == 0) begin pending[u].push_back(rand_upd()); offered++; end
      end
      #1;
      check(req_ready == '0, "held off");
      @(negedge clk);
      check(!sgcl_wr_en, "no write while held off");
    end
    wr_allow = 1'b1;
    // all requesters busy: strict rotation
    for (int k = 0; k < 64; k++) begin
      for (int u = 0; u < NUM_UU; u++) if (pending[u].size() < 2) begin pending[u].push_back(rand_upd()); offered++; end
      step(0, 1'b1);
      last_grant = grant_idx;
    end
    // random load
    for (int k = 0; k < 2000; k++) begin
      step((k < 1500) ? 10 : 0, 1'b0);
    end
    check(written == offered, $sformatf("written %0d of %0d offered", written, offered));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
