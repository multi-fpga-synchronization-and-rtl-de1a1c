// sync_start_trigger: synchronized program start.
//
// The central job server broadcasts one start timestamp to every board.
// Software writes it here with arm; from then on the trigger compares the
// (already corrected) board time with it and emits a single-cycle start pulse
// in the cycle after now reaches start_time. Since all counters agree after
// synchronization, every board fires in the same clock cycle. If start_time
// has already passed when the trigger is armed it fires at once and raises
// late, so a late broadcast is visible to software. The comparison, the
// one-cycle latency and the late flag are this design's choices; the paper
// states only that the start timestamp triggers a synchronized start.
//
// Interface: arm (1 cycle) with start_time; outputs start, armed, late.
module sync_start_trigger #(
  parameter int unsigned TIME_W = 64
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [TIME_W-1:0] now,
  input  logic              arm,
  input  logic [TIME_W-1:0] start_time,
  output logic              start,
  output logic              armed,
  output logic              late
);

  logic [TIME_W-1:0] target;

  always_ff @(posedge clk) begin
    if (rst) begin
      target <= '0;
      armed  <= 1'b0;
      start  <= 1'b0;
      late   <= 1'b0;
    end else begin
      start <= 1'b0;
      if (arm) begin
        target <= start_time;
        armed  <= 1'b1;
        late   <= (now > start_time);
      end else if (armed && now >= target) begin
        start <= 1'b1;
        armed <= 1'b0;
      end
    end
  end

endmodule
