// lcs_timer -- timestamp counter between selected sampling points.
//
// `ts` is the time from the previous selected (quantized and reported) point
// to the current sampling period, in sampling periods, minus one: a point in
// the period right after the previous one gets 0, and the largest value
// 2^TW-1 stands for 2^TW periods, so a 10-bit timestamp spans up to 1024
// periods as the paper states. `event_in` (any clock inside a period) marks
// the current period as a selected point; `tick` (last clock of each period)
// advances the count, restarting it after a marked period. `at_limit` is high
// while ts is at its maximum: the controller must then make the current
// period a selected point, since the next one could not be timed. Counting in
// sampling periods and the forced point at the limit are this design's
// choices; the paper gives only the timer's purpose and its 10-bit width.
// After reset the first period has ts = 0.
module lcs_timer #(
  parameter int unsigned TW = 10  // timestamp width (paper: 10 bits)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tick,      // end of a sampling period
  input  logic          event_in,  // current period is a selected point
  output logic [TW-1:0] ts,        // periods since previous point, minus one
  output logic          at_limit   // ts is at its maximum
);

  logic seen;  // event_in seen during the current period

  assign at_limit = &ts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts   <= '0;
      seen <= 1'b0;
    end else if (tick) begin
      ts   <= (seen || event_in) ? '0 : ts + 1'b1;
      seen <= 1'b0;
    end else if (event_in) begin
      seen <= 1'b1;
    end
  end

endmodule
