// tb_time_count: self-checking test of time_count.
//
// A reference counter in the testbench follows the same rules (restart on
// network_cycle_start, +1 per tick, wrap after pgcl_cycle ticks) and the DUT's
// time, time_valid and cycle_start are compared with it after every clock.
// Ticks arrive at random; pgcl_cycle changes and network_cycle_start restarts
// the count in the middle of a cycle. The rate check counts one cycle_start
// per pgcl_cycle ticks.
module tb_time_count;
  import foodog_pkg::*;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              ncs = 1'b0;
  logic              tick = 1'b0;
  logic [TIME_W-1:0] pgcl_cycle = 32'd7;
  logic [TIME_W-1:0] cur_time;
  logic              time_valid;
  logic              cycle_start;

  int checks = 0;
  int failures = 0;

  time_count dut (
    .clk, .rst_n, .network_cycle_start(ncs), .tick, .pgcl_cycle,
    .cur_time, .time_valid, .cycle_start
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

  longint unsigned ref_t;
  bit              ref_valid;
  bit              ref_cs;
  int              ticks_run;
  int              starts_run;

  initial begin
    ref_t = 0; ref_valid = 0; ref_cs = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 6000; k++) begin
      @(negedge clk);
      check(cur_time == 32'(ref_t), $sformatf("k=%0d time %0d exp %0d", k, cur_time, ref_t));
      check(time_valid == ref_valid, $sformatf("k=%0d time_valid", k));
      check(cycle_start == ref_cs, $sformatf("k=%0d cycle_start %0b exp %0b", k, cycle_start, ref_cs));
      // new stimulus
      ncs  = (k == 40) || (k == 2500) || (k == 4011);
      tick = ($urandom_range(0, 9) < 7);
      if (k == 3000) pgcl_cycle = 32'd13;
      if (k == 5000) pgcl_cycle = 32'd1;
      // reference for the next clock
      ref_cs = 1'b0;
      if (ncs) begin
        ref_t = 0; ref_valid = 1; ref_cs = 1;
      end else if (ref_valid && tick) begin
        if (ref_t + 1 >= pgcl_cycle) begin ref_t = 0; ref_cs = 1; end
        else ref_t = ref_t + 1;
      end
    end
    // rate: with a tick in every clock, one cycle_start per pgcl_cycle clocks
    pgcl_cycle = 32'd10;
    ncs = 1'b1; tick = 1'b1;
    @(negedge clk);
    ncs = 1'b0;
    ticks_run = 0; starts_run = 0;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      ticks_run++;
      if (cycle_start) starts_run++;
    end
    check(starts_run == 100, $sformatf("rate: %0d cycle starts in 1000 ticks, exp 100", starts_run));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
