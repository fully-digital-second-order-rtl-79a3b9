// lcs_control -- digital control logic of the second-order level-crossing
// sampling ADC (the modified SAR control logic).
//
// Every sampling period of CPS clocks runs the same phase plan:
//   phase 0        `sample` high: the capacitive DAC tracks the input and
//                  holds it at the end of the clock.
//   phase 1        DAC <- upper threshold (pred + Delta), comparator on.
//   phase 2        DAC <- lower threshold (pred - Delta), comparator on; at
//                  the end of the clock the window decision is made.
//   phase 3..N+2   reserved SAR window: N trials, one per clock, used only
//                  when the sample must be quantized.
//   rest           sleep: comparator off (cmp_en = Vcomp low).
// If the held input lies inside the window (not above the upper threshold
// and above the lower one) the prediction has succeeded: the predicted code
// is the result of the period, no SAR trial is made and the comparator sleeps
// from phase 3 on. Otherwise the SAR quantizes the sample, the quantized code
// is reported as a selected point together with its timestamp, and the next
// period is quantized as well (no prediction) so that the extrapolation
// restarts from two quantized codes. The two most recent results, predicted
// or quantized, form the history the predictor extrapolates from. All of this
// follows the paper. This design's own choices: the exact phase plan; both
// threshold comparisons are always made; the first two periods after reset
// are quantized (the first one reported as a point); a period whose
// timestamp has reached its maximum is quantized and reported so the next
// interval can still be timed.
//
// Outputs, all registered one-clock pulses with their data:
//   out_valid/out_code/out_kind/out_quantized  result of every period, at
//       phase 3 for a predicted code, at phase N+4 for a quantized one;
//   event_valid/event_code/event_ts  selected points (the compressed stream);
//   quant_pulse  a full quantization took place (pulse sequence of events).
// upper_clamped/lower_clamped are combinational status bits from the
// predictor: the window edge was cut at a rail.
// Requires CPS >= N + 5.
module lcs_control
  import lcs_pkg::*;
#(
  parameter int unsigned N   = ADC_BITS,         // paper: 10
  parameter int unsigned DW  = DELTA_BITS,
  parameter int unsigned TW  = TS_BITS,          // paper: 10
  parameter int unsigned CPS = CLKS_PER_SAMPLE   // paper: 16 kHz / 1 kHz
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] delta,          // Delta in LSB
  // analog front end
  output logic          sample,         // DAC tracks the input
  output logic [N-1:0]  dac_code,       // code on the DAC
  output logic          cmp_en,         // comparator enable (Vcomp)
  input  logic          cmp_out,        // 1: held input above DAC level
  // per-period result
  output logic          out_valid,
  output logic [N-1:0]  out_code,
  output sample_kind_e  out_kind,
  output logic          out_quantized,
  // selected points
  output logic          event_valid,
  output logic [N-1:0]  event_code,
  output logic [TW-1:0] event_ts,
  output logic          quant_pulse,
  // status: the threshold window was cut at a rail (valid in phases 1-2)
  output logic          upper_clamped,
  output logic          lower_clamped
);

  if (CPS < N + 5) begin : g_cps_check
    $error("lcs_control: CPS must be at least N + 5");
  end

  localparam int unsigned PW = $clog2(CPS);

  logic [PW-1:0] ph;
  logic [N-1:0]  y1, y0;          // history: latest and previous result
  logic [1:0]    hist_cnt;        // results collected since reset (saturates at 2)
  logic          restart_pending; // next period must be quantized
  logic          forced;          // this period is quantized without prediction
  logic          above_u;         // result of the upper comparison
  sample_kind_e  quant_kind;      // why the running SAR conversion happens

  logic [N-1:0]  pred, upper, lower;
  logic          sar_start, sar_busy, sar_done;
  logic [N-1:0]  sar_trial, sar_result;
  logic [TW-1:0] ts;
  logic          ts_at_limit;
  logic          in_window;
  logic          tick;

  lcs_predictor #(.N(N), .DW(DW)) u_pred (
    .y1, .y0, .delta, .pred, .upper, .lower, .upper_clamped, .lower_clamped
  );

  sar_logic #(.N(N)) u_sar (
    .clk, .rst_n, .start(sar_start), .cmp(cmp_out),
    .trial(sar_trial), .busy(sar_busy), .done(sar_done), .result(sar_result)
  );

  lcs_timer #(.TW(TW)) u_timer (
    .clk, .rst_n, .tick, .event_in(event_valid), .ts, .at_limit(ts_at_limit)
  );

  assign tick      = (ph == PW'(CPS - 1));
  assign in_window = !above_u && cmp_out;   // cmp_out is the lower comparison here
  assign sar_start = (ph == PW'(PH_CMP_L)) && (forced || !in_window);

  // Front-end control
  always_comb begin
    sample   = (ph == PW'(PH_SAMPLE));
    cmp_en   = 1'b0;
    dac_code = '0;
    if (sar_busy) begin
      cmp_en   = 1'b1;
      dac_code = sar_trial;
    end else if (!forced && ph == PW'(PH_CMP_U)) begin
      cmp_en   = 1'b1;
      dac_code = upper;
    end else if (!forced && ph == PW'(PH_CMP_L)) begin
      cmp_en   = 1'b1;
      dac_code = lower;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph              <= '0;
      y1              <= '0;
      y0              <= '0;
      hist_cnt        <= '0;
      restart_pending <= 1'b0;
      forced          <= 1'b1;
      above_u         <= 1'b0;
      quant_kind      <= KIND_STARTUP;
      out_valid       <= 1'b0;
      out_code        <= '0;
      out_kind        <= KIND_STARTUP;
      out_quantized   <= 1'b0;
      event_valid     <= 1'b0;
      event_code      <= '0;
      event_ts        <= '0;
      quant_pulse     <= 1'b0;
    end else begin
      out_valid   <= 1'b0;
      event_valid <= 1'b0;
      quant_pulse <= 1'b0;
      ph <= tick ? '0 : ph + 1'b1;

      // Decide at the end of the sampling phase whether to predict
      if (ph == PW'(PH_SAMPLE))
        forced <= (hist_cnt != 2'd2) || restart_pending || ts_at_limit;

      if (ph == PW'(PH_CMP_U) && !forced)
        above_u <= cmp_out;

      // Window decision
      if (ph == PW'(PH_CMP_L)) begin
        if (forced) begin
          if (hist_cnt == 2'd0)                       quant_kind <= KIND_STARTUP;
          else if (restart_pending || hist_cnt == 2'd1) quant_kind <= KIND_RESTART;
          else                                         quant_kind <= KIND_TS_LIMIT;
        end else if (in_window) begin
          out_valid     <= 1'b1;
          out_code      <= pred;
          out_kind      <= KIND_PREDICTED;
          out_quantized <= 1'b0;
          y0 <= y1;
          y1 <= pred;
        end else begin
          quant_kind <= above_u ? KIND_FAIL_HIGH : KIND_FAIL_LOW;
        end
      end

      // End of a SAR conversion
      if (sar_done) begin
        out_valid     <= 1'b1;
        out_code      <= sar_result;
        out_kind      <= quant_kind;
        out_quantized <= 1'b1;
        quant_pulse   <= 1'b1;
        y0 <= y1;
        y1 <= sar_result;
        if (hist_cnt != 2'd2) hist_cnt <= hist_cnt + 2'd1;
        if (quant_kind != KIND_RESTART) begin
          event_valid     <= 1'b1;
          event_code      <= sar_result;
          event_ts        <= ts;
          restart_pending <= 1'b1;
        end else begin
          restart_pending <= 1'b0;
        end
      end
    end
  end

  // Protocol checks
  always_ff @(posedge clk)
    if (rst_n) begin
      // the comparator only runs in the compare phases and the SAR window
      a_cmp_en_window: assert (!cmp_en || (ph >= PW'(PH_CMP_U) && ph < PW'(PH_SAR0 + N)));
      // a result comes at phase 3 (predicted) or N+4 (quantized)
      a_out_phase: assert (!out_valid || ph == PW'(PH_SAR0) || ph == PW'(PH_SAR0 + N + 1));
      // selected points are quantized results
      a_event_quantized: assert (!event_valid || (out_valid && out_quantized));
    end

endmodule
