// lcs_adc -- second-order level-crossing sampling ADC, complete converter.
//
// A 10-bit SAR converter whose control logic first tries to predict each
// sample by straight-line extrapolation from the two previous results and
// checks the prediction with two comparisons against pred +/- Delta. Inside
// the window the predicted code is taken and the comparator sleeps; outside
// it the sample (and the next one) is quantized by the SAR, and the
// quantized code leaves as a selected point with a timestamp. The structure
// -- capacitive DAC, dynamic comparator, modified control logic with
// predictor, threshold calculation and timer -- is the paper's. The DAC and
// comparator are behavioural models (lcs_cdac, lcs_comparator) with
// voltages carried as microvolt integers; the digital control logic
// (lcs_control) is synthesizable.
//
// Interface: clk is the 16 kHz control clock, one sample is taken every CPS
// = 16 clocks (1 kHz). vin_p/vin_n are the differential input in microvolts,
// full scale +/- VREF_UV. delta is the Delta threshold in LSB. The outputs
// are those of lcs_control: a result for every sampling period
// (out_valid/out_code/out_kind/out_quantized), the compressed stream of
// selected points (event_valid/event_code/event_ts), the quantization pulse
// sequence, and the comparator enable Vcomp for observation.
module lcs_adc
  import lcs_pkg::*;
#(
  parameter int unsigned N       = ADC_BITS,        // paper: 10-bit
  parameter int unsigned DW      = DELTA_BITS,
  parameter int unsigned TW      = TS_BITS,         // paper: 10-bit timestamp
  parameter int unsigned CPS     = CLKS_PER_SAMPLE, // paper: 16 kHz / 1 kHz
  parameter int unsigned VREF_UV = 500000           // paper: +/- 0.5 V
) (
  input  logic          clk,
  input  logic          rst_n,
  input  uvolt_t        vin_p,
  input  uvolt_t        vin_n,
  input  logic [DW-1:0] delta,
  output logic          out_valid,
  output logic [N-1:0]  out_code,
  output sample_kind_e  out_kind,
  output logic          out_quantized,
  output logic          event_valid,
  output logic [N-1:0]  event_code,
  output logic [TW-1:0] event_ts,
  output logic          quant_pulse,
  output logic          vcomp,
  output logic          upper_clamped,
  output logic          lower_clamped
);

  logic         sample;
  logic [N-1:0] dac_code;
  logic         cmp_out;
  uvolt_t       vres_p, vres_n;

  lcs_control #(.N(N), .DW(DW), .TW(TW), .CPS(CPS)) u_ctrl (
    .clk, .rst_n, .delta,
    .sample, .dac_code, .cmp_en(vcomp), .cmp_out,
    .out_valid, .out_code, .out_kind, .out_quantized,
    .event_valid, .event_code, .event_ts, .quant_pulse,
    .upper_clamped, .lower_clamped
  );

  lcs_cdac #(.N(N), .VREF_UV(VREF_UV)) u_cdac (
    .clk, .sample, .vin_p, .vin_n, .code(dac_code),
    .vout_p(vres_p), .vout_n(vres_n)
  );

  lcs_comparator u_cmp (
    .clk, .en(vcomp), .vin_p(vres_p), .vin_n(vres_n), .out(cmp_out)
  );

endmodule
