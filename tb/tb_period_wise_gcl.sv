// tb_period_wise_gcl: self-checking test of the period-wise GCL RAM at its
// full depth of 1000 entries.
//
// Random 45-bit entries are written to every address and kept in a
// testbench copy; reads at random addresses must return the copy one clock
// later. A read of an address being written in the same clock must return
// the old value. Writes beyond the depth must leave the contents unchanged.
module tb_period_wise_gcl;
  import foodog_pkg::*;

  localparam int unsigned DEPTH = DEF_PGCL_DEPTH;
  localparam int unsigned AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          wr_en = 1'b0;
  logic [AW-1:0] wr_addr = '0;
  pgcl_entry_t   wr_data = '0;
  logic [AW-1:0] rd_addr = '0;
  pgcl_entry_t   rd_data;

  int checks = 0;
  int failures = 0;

  period_wise_gcl dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

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

  pgcl_entry_t model [DEPTH];
  pgcl_entry_t expect_q;

  function automatic pgcl_entry_t rand_entry();
    pgcl_entry_t e;
    e.update_time = $urandom;
    e.gate_id     = GATE_W'($urandom);
    e.gate_state  = 1'($urandom);
    e.queue_id    = QUE_W'($urandom);
    return e;
  endfunction

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1'b1; wr_addr = AW'(a); wr_data = rand_entry();
      model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 1'b0;
    // random reads
    for (int k = 0; k < 3000; k++) begin
      rd_addr = AW'($urandom_range(0, DEPTH - 1));
      expect_q = model[rd_addr];
      @(negedge clk);
      check(rd_data == expect_q, $sformatf("read addr %0d", rd_addr));
    end
    // read during write to the same address returns the old entry
    for (int k = 0; k < 50; k++) begin
      rd_addr = AW'($urandom_range(0, DEPTH - 1));
      wr_en = 1'b1; wr_addr = rd_addr; wr_data = rand_entry();
      expect_q = model[rd_addr];
      model[rd_addr] = wr_data;
      @(negedge clk);
      wr_en = 1'b0;
      check(rd_data == expect_q, "read-before-write");
      @(negedge clk);
      check(rd_data == model[rd_addr], "new value after write");
    end
    // out-of-range write is ignored
    wr_en = 1'b1; wr_addr = AW'(DEPTH + 3); wr_data = rand_entry();
    @(negedge clk);
    wr_en = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = AW'(a);
      @(negedge clk);
      check(rd_data == model[a], $sformatf("final sweep addr %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
