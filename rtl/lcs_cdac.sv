// lcs_cdac -- behavioural model of the fully differential switched-capacitor
// DAC (kind: behavioural model, not synthesizable hardware).
//
// In a charge-redistribution SAR converter the capacitor array both samples
// the input and subtracts the DAC level from it. This model does the same at
// the level of voltages: on a rising clock edge with `sample` high it holds
// the differential input vin_p - vin_n; it then drives the comparator with a
// differential voltage equal to the held input minus the DAC level of `code`,
//   Vdac(code) = -VREF + code * 2*VREF / 2^N   (microvolts, rounded down),
// so the comparator sees a positive difference exactly when the held input
// is above the DAC level. The paper gives the DAC's role and its fully
// differential form; the ideal transfer curve, the +/- VREF range (the
// paper's +/- 0.5 V input range) and microvolt integers for voltages are
// this model's choices. No settling, mismatch or noise is modelled.
module lcs_cdac
  import lcs_pkg::*;
#(
  parameter int unsigned N       = ADC_BITS,  // paper: 10-bit
  parameter int unsigned VREF_UV = 500000     // full scale +/- 0.5 V
) (
  input  logic         clk,
  input  logic         sample,   // track the input while high
  input  uvolt_t       vin_p,
  input  uvolt_t       vin_n,
  input  logic [N-1:0] code,
  output uvolt_t       vout_p,   // to the comparator
  output uvolt_t       vout_n
);

  uvolt_t vh_p, vh_n;  // held input
  uvolt_t vdac, vdac_p, vdac_n;

  initial begin
    vh_p = '0;
    vh_n = '0;
  end

  always @(posedge clk)
    if (sample) begin
      vh_p <= vin_p;
      vh_n <= vin_n;
    end

  always_comb begin
    vdac   = uvolt_t'((64'(code) * 64'(2 * VREF_UV)) >> N) - uvolt_t'(VREF_UV);
    vdac_p = vdac >>> 1;       // split the DAC level over the two sides
    vdac_n = vdac_p - vdac;
    vout_p = vh_p - vdac_p;
    vout_n = vh_n - vdac_n;
  end

endmodule
