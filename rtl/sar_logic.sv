// sar_logic -- successive-approximation register of the converter.
//
// A pulse on `start` begins a conversion. In each of the next N clocks the
// block presents a trial code (bits already decided, plus the bit under test)
// on `trial` and holds `busy` high; the comparator decides during that clock
// and its answer `cmp` (1: input above the DAC level of the trial code) is
// taken at the closing clock edge, keeping or dropping the bit. MSB first,
// one bit per clock, so N clocks per conversion; in the clock after the last
// trial `done` pulses and `result` holds the final code until the next start.
// The N-comparison binary search is the conventional SAR the paper starts
// from; one bit per clock inside a fixed window is this design's timing.
module sar_logic #(
  parameter int unsigned N = 10  // resolution (paper: 10-bit)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,   // begin a conversion (ignored while busy)
  input  logic         cmp,     // comparator decision for the current trial
  output logic [N-1:0] trial,   // code for the DAC while busy
  output logic         busy,    // a trial is on the DAC (comparator needed)
  output logic         done,    // one-clock pulse: result is valid
  output logic [N-1:0] result
);

  logic [N-1:0] acc;   // bits decided so far
  logic [N-1:0] mask;  // one-hot bit under test, zero when idle

  assign busy   = |mask;
  assign trial  = acc | mask;
  assign result = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      mask <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        if (cmp) acc <= acc | mask;
        mask <= mask >> 1;
        if (mask[0]) done <= 1'b1;
      end else if (start) begin
        acc  <= '0;
        mask <= {1'b1, {(N-1){1'b0}}};
      end
    end
  end

  // mask is one-hot or zero
  always_ff @(posedge clk)
    if (rst_n) a_mask_onehot: assert ((mask & (mask - 1'b1)) == '0);

endmodule
