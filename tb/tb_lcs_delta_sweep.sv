// tb_lcs_delta_sweep -- Delta sweep on an ECG-like input: data saving,
// comparator use and error against Delta.
//
// The complete converter (default parameters) digitizes four beats of the
// synthetic 1 Hz, 900 mVpp ECG-like waveform of tb_lcs_adc for each Delta in
// {10, 25, 50, 100, 200} mV, with a reset between runs. For each run it
// reports the compression factor (plain SAR: 10 bits per period; this
// converter: 10 bits of code + 10 bits of timestamp per selected point), the
// comparator clocks against a plain SAR (10 per period), the RMS error of
// the per-period output against an ideal 10-bit quantization, and the RMS
// error of a receiver that rebuilds the waveform from the selected points
// alone by linear interpolation. Checked: every predicted result lies within
// Delta + 1 LSB of the ideal code (the window guarantees it); the absolute
// time of every selected point decoded from the timestamps equals its true
// period index; a larger Delta never gives more selected points nor more
// comparator clocks; the
// smallest Delta gives a lower output error than the largest.
module tb_lcs_delta_sweep;
  import lcs_pkg::*;
  localparam int N = 10, CPS = 16, TW = 10, MAXC = 1023, BEATS = 4;
  localparam int PERIODS = BEATS * 1000;
  localparam longint VREF = 500000;
  localparam int NRUN = 5;
  localparam int DELTA_MV[NRUN] = '{10, 25, 50, 100, 200};

  logic          clk = 1'b0, rst_n = 1'b0;
  uvolt_t        vin_p, vin_n;
  logic [9:0]    delta;
  logic          out_valid, out_quantized, event_valid, quant_pulse, vcomp;
  logic [N-1:0]  out_code, event_code;
  sample_kind_e  out_kind;
  logic [TW-1:0] event_ts;
  logic          upper_clamped, lower_clamped;

  lcs_adc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic longint vdac(int c);
    return (longint'(c) * 2 * VREF) / 1024 - VREF;
  endfunction
  function automatic int quant(longint v);
    int lo = 0, hi = MAXC;
    if (!(v > vdac(0))) return 0;
    while (lo < hi) begin
      int mid = (lo + hi + 1) / 2;
      if (v > vdac(mid)) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction
  function automatic int bump(int t, int t0, int w, int amp);
    longint d;
    if (t < t0 || t >= t0 + w) return 0;
    d = 2 * (t - t0) - w;
    return int'(longint'(amp) * (longint'(w) * w - d * d) / (longint'(w) * w));
  endfunction
  function automatic int spike(int t, int t0, int w, int amp);
    int h = w / 2;
    if (t < t0 || t >= t0 + w) return 0;
    return (t < t0 + h) ? amp * (t - t0) / h : amp * (t0 + w - t) / h;
  endfunction
  function automatic int ecg(int t);
    return bump(t, 100, 90, 120000) + spike(t, 250, 20, -100000) + spike(t, 265, 40, 650000)
         + spike(t, 300, 30, -250000) + bump(t, 450, 180, 200000);
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  int ideal[PERIODS];
  int outc[PERIODS];
  int pt_time[PERIODS], pt_code[PERIODS];
  int npts_prev, cmps_prev;
  real err_out[NRUN];

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vin_p = 0; vin_n = 0; delta = '0;
    npts_prev = PERIODS + 1;
    cmps_prev = PERIODS * CPS;
    for (int r = 0; r < NRUN; r++) begin
      automatic int d = (DELTA_MV[r] * 1024 + 500) / 1000;  // Delta in LSB
      automatic int npts = 0, cmps = 0, abs_time = -1, bad_bound = 0;
      automatic real se_out = 0.0, se_rec = 0.0;
      real cf;
      rst_n = 1'b0;
      delta = 10'(d);
      repeat (3) @(negedge clk);
      rst_n = 1'b1;
      for (int t = 0; t < PERIODS; t++) begin
        automatic int v_uv = ecg(t % 1000) + int'($urandom_range(2000)) - 1000;
        vin_p = v_uv / 2;
        vin_n = vin_p - v_uv;
        ideal[t] = quant(longint'(vin_p) - longint'(vin_n));
        for (int c = 0; c < CPS; c++) begin
          if (vcomp) cmps++;
          if (out_valid) begin
            outc[t] = int'(out_code);
            if (!out_quantized) begin
              checks++;
              if (int'(out_code) > ideal[t] + d + 1 || int'(out_code) < ideal[t] - d - 1) bad_bound++;
            end
          end
          if (event_valid) begin
            // decode the absolute time from the timestamp chain
            abs_time = (abs_time < 0) ? int'(event_ts) : abs_time + int'(event_ts) + 1;
            checks++;
            if (abs_time != t) fail($sformatf("point decoded at period %0d, true %0d", abs_time, t));
            pt_time[npts] = abs_time;
            pt_code[npts] = int'(event_code);
            npts++;
          end
          @(negedge clk);
        end
      end
      if (bad_bound != 0) fail($sformatf("Delta %0d mV: %0d predicted results outside +/-Delta", DELTA_MV[r], bad_bound));
      // errors in LSB
      for (int t = 0; t < PERIODS; t++) se_out += real'((outc[t] - ideal[t]) * (outc[t] - ideal[t]));
      for (int k = 0; k + 1 < npts; k++)
        for (int t = pt_time[k]; t < pt_time[k + 1]; t++) begin
          automatic real y = real'(pt_code[k]) + real'(pt_code[k + 1] - pt_code[k]) *
                   real'(t - pt_time[k]) / real'(pt_time[k + 1] - pt_time[k]);
          se_rec += (y - real'(ideal[t])) * (y - real'(ideal[t]));
        end
      err_out[r] = $sqrt(se_out / PERIODS);
      cf = real'(PERIODS * 10) / real'(npts * 20);
      $display("Delta %3d mV (%3d LSB): %4d points, compression factor %6.2f, comparator clocks %5.1f%% of plain SAR, rms error %6.2f LSB per-period output, %6.2f LSB rebuilt from points",
               DELTA_MV[r], d, npts, cf, 100.0 * cmps / (PERIODS * N), err_out[r],
               $sqrt(se_rec / (pt_time[npts - 1] - pt_time[0])));
      checks++;
      if (npts > npts_prev) fail($sformatf("Delta %0d mV gives more points than the smaller Delta", DELTA_MV[r]));
      npts_prev = npts;
      checks++;
      if (cmps > cmps_prev) fail($sformatf("Delta %0d mV uses the comparator more than the smaller Delta", DELTA_MV[r]));
      cmps_prev = cmps;
    end
    checks++;
    if (!(err_out[0] < err_out[NRUN - 1])) fail("error does not grow with Delta");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
