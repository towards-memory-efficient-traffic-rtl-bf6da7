// tb_update_unit: self-checking test of one update unit (TimeCount,
// GateUpdate and the period-wise GCL RAM together).
//
// The unit is loaded through its configuration port with the 100 ms
// period-wise GCL of the worked example (gate 1 opens at 6 on queue 0 and
// closes at 13) plus a random sorted list, then started with
// network_cycle_start. Ticks come every third clock. Each offered sgcl_entry
// must match the next list entry and come while cur_time equals its
// updateTime (at most one tick late only when entries share a time); every
// pGCL cycle must replay the whole list.
module tb_update_unit;
  import foodog_pkg::*;

  localparam int unsigned DEPTH = DEF_PGCL_DEPTH;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned P = 200;
  localparam int unsigned LEN = 40;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              ncs = 1'b0;
  logic              tick = 1'b0;
  logic [TIME_W-1:0] pgcl_cycle = TIME_W'(P);
  logic [AW:0]       pgcl_len = '0;
  logic              cfg_wr_en = 1'b0;
  logic [AW-1:0]     cfg_wr_addr = '0;
  pgcl_entry_t       cfg_wr_data = '0;
  sgcl_update_t      sgcl_entry;
  logic              sgcl_valid;
  logic              sgcl_ready = 1'b1;
  logic [TIME_W-1:0] cur_time;
  logic              cycle_start;
  logic [AW:0]       addr_ptr;

  int checks = 0;
  int failures = 0;

  update_unit dut (
    .clk, .rst_n, .network_cycle_start(ncs), .tick, .pgcl_cycle, .pgcl_len,
    .cfg_wr_en, .cfg_wr_addr, .cfg_wr_data,
    .sgcl_entry, .sgcl_valid, .sgcl_ready, .cur_time, .cycle_start, .addr_ptr
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pgcl_entry_t list [LEN];
  int          k_next;
  int          fires;
  int          pcycles;
  int unsigned tk;

  initial begin
    // sorted list: worked example first, then strictly rising random times from 15
    list[0] = '{update_time: 6,  gate_id: 1, gate_state: GATE_OPEN,   queue_id: 0};
    list[1] = '{update_time: 13, gate_id: 1, gate_state: GATE_CLOSED, queue_id: 0};
    begin
      int unsigned t;
      t = 14;
      for (int k = 2; k < LEN; k++) begin
        t = t + $urandom_range(1, 4);
        if (t > P - 1) t = P - 1;
        list[k].update_time = t;
        list[k].gate_id     = GATE_W'($urandom_range(0, 499));
        list[k].gate_state  = 1'($urandom);
        list[k].queue_id    = QUE_W'($urandom);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < LEN; k++) begin
      cfg_wr_en = 1'b1; cfg_wr_addr = AW'(k); cfg_wr_data = list[k];
      @(negedge clk);
    end
    cfg_wr_en = 1'b0;
    pgcl_len = (AW + 1)'(LEN);
    repeat (5) @(negedge clk);
    check(!sgcl_valid, "idle before network_cycle_start");
    ncs = 1'b1;
    @(negedge clk);
    ncs = 1'b0;
    k_next = 0; fires = 0; pcycles = 0; tk = 0;
    for (int c = 0; c < 3 * 4 * P; c++) begin
      tick = (tk % 3 == 2);
      tk++;
      if (cycle_start) begin
        if (c > 0) begin
          check(k_next == LEN, $sformatf("pGCL cycle replayed %0d of %0d entries", k_next, LEN));
          pcycles++;
        end
        k_next = 0;
      end
      #1;
      if (sgcl_valid) begin
        check(k_next < LEN, "offer past the list");
        if (k_next < LEN) begin
          check(sgcl_entry.gate_id == list[k_next].gate_id &&
                sgcl_entry.entry.gate_state == list[k_next].gate_state &&
                sgcl_entry.entry.queue_id == list[k_next].queue_id,
                $sformatf("entry %0d content", k_next));
          check(cur_time >= list[k_next].update_time, $sformatf("entry %0d early", k_next));
          // only entries sharing a tick queue up, one per clock; at most
          // LEN clocks of backlog, so never more than one tick late
          check(cur_time <= list[k_next].update_time + 1,
                $sformatf("entry %0d late: time %0d update %0d", k_next, cur_time, list[k_next].update_time));
          k_next++; fires++;
        end
      end
      @(negedge clk);
    end
    check(pcycles >= 3, $sformatf("%0d pGCL cycles", pcycles));
    check(fires >= 3 * LEN, "entries replayed every pGCL cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
