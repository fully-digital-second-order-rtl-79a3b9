// lcs_pkg -- constants and types shared by the second-order level-crossing
// sampling ADC.
//
// The converter resolves ADC_BITS = 10 bits per quantization and gives a
// TS_BITS = 10 bit timestamp; both numbers follow the paper. It runs its
// control logic from a 16 kHz clock and samples at 1 kHz, so one sampling
// period is CLKS_PER_SAMPLE = 16 clocks. The cycle-by-cycle use of those 16
// clocks (the phase plan below) is this design's own choice.
//
// Analog quantities in the behavioural models are carried as signed integers
// in microvolts (uvolt_t), which every tool in a digital flow can handle.
package lcs_pkg;

  localparam int unsigned ADC_BITS        = 10;  // SAR resolution
  localparam int unsigned TS_BITS         = 10;  // timestamp width
  localparam int unsigned DELTA_BITS      = 10;  // width of the Delta input (LSB units)
  localparam int unsigned CLKS_PER_SAMPLE = 16;  // 16 kHz clock / 1 kHz sampling

  // Phase plan of one sampling period (phase = clock index inside the period)
  localparam int unsigned PH_SAMPLE = 0;  // DAC tracks the input, held at the end
  localparam int unsigned PH_CMP_U  = 1;  // compare against the upper threshold
  localparam int unsigned PH_CMP_L  = 2;  // compare against the lower threshold, decide
  localparam int unsigned PH_SAR0   = 3;  // first of ADC_BITS SAR trials

  // Differential voltage in microvolts
  typedef logic signed [31:0] uvolt_t;

  // Why a sampling point was resolved the way it was
  typedef enum logic [2:0] {
    KIND_PREDICTED = 3'd0,  // prediction succeeded, predicted code used
    KIND_FAIL_HIGH = 3'd1,  // input above the upper threshold, quantized
    KIND_FAIL_LOW  = 3'd2,  // input below the lower threshold, quantized
    KIND_RESTART   = 3'd3,  // second quantization that restarts the prediction
    KIND_STARTUP   = 3'd4,  // first quantization after reset
    KIND_TS_LIMIT  = 3'd5   // quantized because the timestamp would overflow
  } sample_kind_e;

endpackage
