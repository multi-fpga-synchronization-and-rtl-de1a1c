// sync_time_counter: the board's time reference for pulse triggering.
//
// A free-running counter in the control clock domain (500 MHz). Because every
// board's clock is derived from one distributed reference in zero-delay mode,
// all counters advance at exactly the same rate; they only differ by a
// constant offset set by when each board left reset. Software measures that
// offset with the minimal-PTP exchange and removes it here: when adj_valid is
// high the counter takes now + 1 + adj_value (adj_value is two's complement),
// so a correction is applied in a single cycle without losing the tick.
// Counter width and the one-cycle signed-add correction are this design's
// choices; the paper states only that counter values are adjusted by the
// software-computed offset.
//
// Timing: now is registered; a correction presented in cycle n is visible in
// cycle n+1.
module sync_time_counter #(
  parameter int unsigned TIME_W = 64
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              adj_valid,
  input  logic [TIME_W-1:0] adj_value,
  output logic [TIME_W-1:0] now
);

  always_ff @(posedge clk) begin
    if (rst)            now <= '0;
    else if (adj_valid) now <= now + TIME_W'(1) + adj_value;
    else                now <= now + TIME_W'(1);
  end

endmodule
