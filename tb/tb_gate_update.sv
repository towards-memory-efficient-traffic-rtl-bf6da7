// tb_gate_update: self-checking test of the GateUpdate engine.
//
// The testbench plays the TimeCount (one tick per clock, pGCL cycle of 20)
// and the period-wise GCL RAM (registered read). The list is the 1 ms
// period-wise GCL of the worked example (updateTime 5, 8, 13, 14 for gates 0
// and 2) with one more entry at 13 for gate 1, so two entries share one
// updateTime. With sgcl_ready always high, each entry must be offered exactly
// in the clock in which the time reaches its updateTime, or one clock after
// the previous offer if that is later, in list order, once per pGCL cycle.
// A phase with random backpressure checks that offers are held and never
// early, and a phase with pgcl_len = 0 checks that the engine stays idle.
module tb_gate_update;
  import foodog_pkg::*;

  localparam int unsigned DEPTH = DEF_PGCL_DEPTH;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned P = 20;
  localparam int unsigned LEN = 5;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic [TIME_W-1:0] cur_time = '0;
  logic              time_valid = 1'b0;
  logic              cycle_start = 1'b0;
  logic [AW:0]       pgcl_len;
  logic [AW-1:0]     rd_addr;
  pgcl_entry_t       rd_data;
  sgcl_update_t      sgcl_entry;
  logic              sgcl_valid;
  logic              sgcl_ready;
  logic [AW:0]       addr_ptr;
  logic              ncs = 1'b0;

  int checks = 0;
  int failures = 0;

  gate_update dut (
    .clk, .rst_n, .cur_time, .time_valid, .cycle_start, .pgcl_len,
    .rd_addr, .rd_data, .sgcl_entry, .sgcl_valid, .sgcl_ready, .addr_ptr
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

  // period-wise GCL model
  pgcl_entry_t ram [DEPTH];
  always @(posedge clk) rd_data <= ram[rd_addr];

  // TimeCount model: one tick per clock
  always @(posedge clk) begin
    cycle_start <= 1'b0;
    if (ncs) begin
      cur_time <= '0; time_valid <= 1'b1; cycle_start <= 1'b1;
    end else if (time_valid) begin
      if (cur_time == P - 1) begin cur_time <= '0; cycle_start <= 1'b1; end
      else cur_time <= cur_time + 1;
    end
  end

  int unsigned exp_time [LEN];
  int          k_next;
  int          fires_in_cycle;
  int          cycles_seen;
  bit          bp_phase;
  sgcl_update_t held;
  bit          was_stalled;

  function automatic pgcl_entry_t mk(input int unsigned t, input int unsigned g,
                                     input bit s, input int unsigned q);
    pgcl_entry_t e;
    e.update_time = t; e.gate_id = GATE_W'(g); e.gate_state = s; e.queue_id = QUE_W'(q);
    return e;
  endfunction

  initial begin
    for (int a = 0; a < DEPTH; a++) ram[a] = mk($urandom_range(0, P - 1), 0, 0, 0);
    ram[0] = mk(5, 0, GATE_OPEN, 1);
    ram[1] = mk(8, 2, GATE_OPEN, 0);
    ram[2] = mk(13, 2, GATE_CLOSED, 0);
    ram[3] = mk(13, 1, GATE_CLOSED, 0);
    ram[4] = mk(14, 0, GATE_CLOSED, 0);
    // independent schedule with a ready in every clock
    begin
      int unsigned prev;
      prev = 0;
      for (int k = 0; k < LEN; k++) begin
        exp_time[k] = (ram[k].update_time > prev) ? ram[k].update_time : prev;
        prev = exp_time[k] + 1;
      end
    end
    pgcl_len = (AW + 1)'(LEN);
    sgcl_ready = 1'b1;
    bp_phase = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!sgcl_valid, "no offer before time is valid");
    ncs = 1'b1;
    @(negedge clk);
    ncs = 1'b0;
    k_next = 0; fires_in_cycle = 0; cycles_seen = 0; was_stalled = 0;
    for (int c = 0; c < 8 * P; c++) begin
      if (cycle_start) begin
        if (c > 0) begin
          if (!bp_phase) check(fires_in_cycle == LEN, $sformatf("%0d entries in pGCL cycle, exp %0d", fires_in_cycle, LEN));
          cycles_seen++;
        end
        fires_in_cycle = 0; k_next = 0;
        bp_phase = (cycles_seen >= 3);
      end
      if (was_stalled && !cycle_start)
        check(sgcl_valid && sgcl_entry == held, "offer held while not ready");
      if (bp_phase) sgcl_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (sgcl_valid) begin
        check(k_next < LEN, "offer after the last entry");
        check(sgcl_entry.gate_id == ram[k_next].gate_id &&
              sgcl_entry.entry.gate_state == ram[k_next].gate_state &&
              sgcl_entry.entry.queue_id == ram[k_next].queue_id,
              $sformatf("entry %0d content", k_next));
        check(cur_time >= ram[k_next].update_time, $sformatf("entry %0d early", k_next));
        if (!bp_phase)
          check(cur_time == exp_time[k_next],
                $sformatf("entry %0d at time %0d exp %0d", k_next, cur_time, exp_time[k_next]));
        if (sgcl_ready) begin
          k_next++; fires_in_cycle++;
          was_stalled = 0;
        end else begin
          was_stalled = 1; held = sgcl_entry;
        end
      end else begin
        was_stalled = 0;
        if (!bp_phase && k_next < LEN && !cycle_start)
          check(cur_time < exp_time[k_next], $sformatf("entry %0d missing at time %0d", k_next, cur_time));
      end
      @(negedge clk);
    end
    check(cycles_seen >= 7, "pGCL cycles replayed");
    // idle with no entries
    pgcl_len = '0;
    sgcl_ready = 1'b1;
    for (int c = 0; c < 2 * P; c++) begin
      @(negedge clk);
      check(!sgcl_valid, "idle engine offers nothing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
