// tb_stream_wise_gcl: self-checking test of the stream-wise GCL RAM at its
// full depth of 500 gates.
//
// After reset init_done must rise after exactly 500 clocks and every gate
// must then read "closed, queue 0" although the RAM starts with random
// contents. Random writes are mirrored in a testbench copy and random reads
// compared with it one clock later; writes before init_done, at or beyond
// gate 500, must have no effect.
module tb_stream_wise_gcl;
  import foodog_pkg::*;

  localparam int unsigned N = DEF_N_STREAMS;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              wr_en = 1'b0;
  logic [GATE_W-1:0] wr_addr = '0;
  sgcl_entry_t       wr_data = '0;
  logic [GATE_W-1:0] rd_addr = '0;
  sgcl_entry_t       rd_data;
  logic              init_done;

  int checks = 0;
  int failures = 0;

  stream_wise_gcl dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data, .init_done);

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

  sgcl_entry_t model [N];
  sgcl_entry_t exp_rd;
  int          init_clocks;

  initial begin
    for (int g = 0; g < N; g++) model[g] = '{gate_state: GATE_CLOSED, queue_id: '0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // a write during the clearing sweep is dropped
    wr_en = 1'b1; wr_addr = 9'd3; wr_data = '{gate_state: GATE_OPEN, queue_id: 3'd5};
    init_clocks = 0;
    while (!init_done && init_clocks < 2 * N) begin
      @(negedge clk);
      init_clocks++;
    end
    wr_en = 1'b0;
    check(init_clocks == N, $sformatf("init took %0d clocks, exp %0d", init_clocks, N));
    for (int g = 0; g < N; g++) begin
      rd_addr = GATE_W'(g);
      @(negedge clk);
      check(rd_data == model[g], $sformatf("gate %0d not closed after init", g));
    end
    for (int k = 0; k < 4000; k++) begin
      wr_en = 1'($urandom);
      wr_addr = GATE_W'($urandom_range(0, (k % 10 == 0) ? 511 : N - 1));
      wr_data = sgcl_entry_t'($urandom);
      rd_addr = GATE_W'($urandom_range(0, N - 1));
      exp_rd = model[rd_addr];
      if (wr_en && wr_addr < N) model[wr_addr] = wr_data;
      @(negedge clk);
      check(rd_data == exp_rd, $sformatf("read gate %0d", rd_addr));
    end
    wr_en = 1'b0;
    for (int g = 0; g < N; g++) begin
      rd_addr = GATE_W'(g);
      @(negedge clk);
      check(rd_data == model[g], $sformatf("final gate %0d", g));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
