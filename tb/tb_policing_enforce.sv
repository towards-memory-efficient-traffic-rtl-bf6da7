// tb_policing_enforce: self-checking test of PolicingEnforce.
//
// The testbench holds the stream-wise GCL (500 gates, registered read) with
// random open/closed states and queues, including the three gates of the
// worked example (gate 0 open to queue 1, gate 1 closed, gate 2 open to queue
// 0). A random descriptor enters in most clocks. Each must leave exactly two
// clocks later, in order, with all other bits unchanged: discard = 0 and the
// gate's queueID when the gate is open, discard = 1 and the gate's queueID
// when closed. Descriptors with streamID >= 500 must pass unchanged with
// the bypass flag.
module tb_policing_enforce;
  import foodog_pkg::*;

  localparam int unsigned N = DEF_N_STREAMS;
  localparam int unsigned LAT = 2;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              desc_in_valid = 1'b0;
  logic [DESC_W-1:0] desc_in = '0;
  logic [GATE_W-1:0] sgcl_rd_addr;
  sgcl_entry_t       sgcl_rd_data;
  logic              desc_out_valid;
  logic [DESC_W-1:0] desc_out;
  logic              out_bypass;

  int checks = 0;
  int failures = 0;

  policing_enforce dut (
    .clk, .rst_n, .desc_in_valid, .desc_in, .sgcl_rd_addr, .sgcl_rd_data,
    .desc_out_valid, .desc_out, .out_bypass
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

  sgcl_entry_t sgcl [512];
  always @(posedge clk) sgcl_rd_data <= sgcl[sgcl_rd_addr];

  typedef struct {
    longint unsigned cyc;
    logic [DESC_W-1:0] d;
    bit bypass;
  } exp_t;
  exp_t expq [$];
  exp_t e;
  longint unsigned cyc;
  int n_pass, n_drop, n_bypass;

  function automatic logic [DESC_W-1:0] expected(input logic [DESC_W-1:0] d, output bit bypass);
    logic [DESC_W-1:0] r;
    int unsigned sid;
    sid = d[DESC_SID_LSB +: SID_W];
    r = d;
    bypass = (sid >= N);
    if (!bypass) begin
      r[DESC_DISCARD_BIT] = (sgcl[sid].gate_state == GATE_OPEN) ? 1'b0 : 1'b1;
      r[DESC_QID_LSB +: QUE_W] = sgcl[sid].queue_id;
    end
    return r;
  endfunction

  initial begin
    for (int g = 0; g < 512; g++) sgcl[g] = sgcl_entry_t'($urandom);
    sgcl[0] = '{gate_state: GATE_OPEN,   queue_id: 3'd1};
    sgcl[1] = '{gate_state: GATE_CLOSED, queue_id: 3'd0};
    sgcl[2] = '{gate_state: GATE_OPEN,   queue_id: 3'd0};
    n_pass = 0; n_drop = 0; n_bypass = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    cyc = 0;
    for (int k = 0; k < 5000; k++) begin
      // outputs of the clock that just ended
      if (desc_out_valid) begin
        check(expq.size() > 0, "output without input");
        if (expq.size() > 0) begin
          e = expq.pop_front();
          check(cyc - e.cyc == LAT, $sformatf("latency %0d exp %0d", cyc - e.cyc, LAT));
          check(desc_out == e.d, $sformatf("descriptor %h exp %h", desc_out, e.d));
          check(out_bypass == e.bypass, "bypass flag");
          if (e.bypass) n_bypass++;
          else if (e.d[DESC_DISCARD_BIT]) n_drop++;
          else n_pass++;
        end
      end else begin
        check(expq.size() == 0 || cyc - expq[0].cyc < LAT, "missing output");
      end
      // new input
      desc_in_valid = ($urandom_range(0, 9) < 8);
      desc_in = {$urandom, $urandom};
      if (k < 30) desc_in[DESC_SID_LSB +: SID_W] = SID_W'(k % 3);
      else if ($urandom_range(0, 9) != 0)
        desc_in[DESC_SID_LSB +: SID_W] = SID_W'($urandom_range(0, N - 1));
      if (desc_in_valid) begin
        e.cyc = cyc;
        e.d = expected(desc_in, e.bypass);
        expq.push_back(e);
      end
      @(negedge clk);
      cyc++;
    end
    check(n_pass > 0 && n_drop > 0 && n_bypass > 0, "pass, drop and bypass all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
