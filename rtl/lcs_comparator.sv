// lcs_comparator -- behavioural model of the dynamic comparator (kind:
// behavioural model, not synthesizable hardware).
//
// A dynamic comparator resets while its clock is in one phase and regenerates
// to a decision in the other. The model fires on the falling edge of the
// control clock, half a cycle after the control logic has put a code on the
// DAC, so the decision is ready for the control logic's next rising edge:
// `out` becomes 1 when vin_p > vin_n. With `en` (the paper's enable Vcomp)
// low the comparator is asleep and `out` is forced to 0. The paper gives the
// comparator type and its enable; the firing edge, the ideal decision (no
// offset, noise or metastability) are this model's choices.
module lcs_comparator
  import lcs_pkg::*;
(
  input  logic   clk,
  input  logic   en,      // Vcomp: comparator enable
  input  uvolt_t vin_p,
  input  uvolt_t vin_n,
  output logic   out      // 1: vin_p above vin_n
);

  initial out = 1'b0;

  always @(negedge clk)
    out <= en && (vin_p > vin_n);

endmodule
