// time_count: the TimeCount module of one update unit.
//
// It turns the switch's network_cycle_start pulse and the synchronized time
// tick into the time inside the present pGCL cycle: network_cycle_start sets
// the time to 0 and starts counting, every tick adds one, and after
// pgcl_cycle ticks the time wraps to 0 and a new pGCL cycle begins. A
// period-wise GCL is thus replayed T/pT times per network cycle.
//
// Interface: tick is one time unit of the synchronized clock (the unit of
// updateTime); cur_time is registered. time_valid rises with the first
// network_cycle_start. cycle_start pulses for one clock in the cycle in which
// cur_time becomes 0 (at network_cycle_start and at each wrap).
//
// From the paper: the inputs network_cycle_start and pgcl_cycle, the 32-bit
// time. This design's own choice: the tick input (the paper does not say how
// time advances), counting from 0, waiting for the first network_cycle_start.
module time_count
  import foodog_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              network_cycle_start,
  input  logic              tick,
  input  logic [TIME_W-1:0] pgcl_cycle,
  output logic [TIME_W-1:0] cur_time,
  output logic              time_valid,
  output logic              cycle_start
);

  logic last_tick;  // cur_time is the last time unit of the pGCL cycle
  assign last_tick = ({1'b0, cur_time} + 33'd1) >= {1'b0, pgcl_cycle};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_time    <= '0;
      time_valid  <= 1'b0;
      cycle_start <= 1'b0;
    end else begin
      cycle_start <= 1'b0;
      if (network_cycle_start) begin
        cur_time    <= '0;
        time_valid  <= 1'b1;
        cycle_start <= 1'b1;
      end else if (time_valid && tick) begin
        if (last_tick) begin
          cur_time    <= '0;
          cycle_start <= 1'b1;
        end else begin
          cur_time <= cur_time + 1'b1;
        end
      end
    end
  end

endmodule
