// tb_lcs_adc -- end-to-end test of the complete converter at its default
// parameters (10 bits, 10-bit timestamp, 16 clocks per sample, +/- 0.5 V).
// The input is a synthetic 1 Hz ECG-like waveform of 900 mV peak to peak
// (P wave, QRS complex, T wave, 1 mV of random noise) sampled at 1 kHz, run
// for three beats at Delta = 50 mV and three at Delta = 200 mV, followed by
// a flat stretch longer than the timestamp range and a stretch driven past
// the top of the input range. A reference model in the testbench, working in
// microvolts from the specification (ideal DAC levels, ideal comparator),
// predicts every period's result and kind, each selected point with its
// timestamp and the number of comparator-enabled clocks. Reported: the
// compression factor (10 bits per period for a plain SAR converter against
// 20 bits per selected point) and comparator clocks against a plain SAR.
// Every mechanism -- prediction success, failure above and below the window,
// restart quantization, start-up, timestamp limit, clamped window, sleep --
// must occur at least once.
module tb_lcs_adc;
  import lcs_pkg::*;
  localparam int N = 10, CPS = 16, TW = 10, MAXC = 1023;
  localparam longint VREF = 500000;

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
  int n_kind[6];
  int n_clamp = 0, n_sleep = 0;
  int r_y1 = 0, r_y0 = 0, r_hist = 0, r_elapsed = 1;
  bit r_restart = 0;
  // per-run statistics
  int s_periods, s_points, s_cmps;

  function automatic longint vdac(int c);
    return (longint'(c) * 2 * VREF) / 1024 - VREF;
  endfunction
  function automatic int clampi(int v);
    return (v < 0) ? 0 : (v > MAXC) ? MAXC : v;
  endfunction
  function automatic int quant(longint v);  // largest code with vdac(c) < v, binary search
    int lo = 0, hi = MAXC;
    if (!(v > vdac(0))) return 0;
    while (lo < hi) begin
      int mid = (lo + hi + 1) / 2;
      if (v > vdac(mid)) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  // ECG-like waveform in microvolts, t in ms within the beat (0..999)
  function automatic int bump(int t, int t0, int w, int amp);  // parabolic bump
    longint d;
    if (t < t0 || t >= t0 + w) return 0;
    d = 2 * (t - t0) - w;
    return int'(longint'(amp) * (longint'(w) * w - d * d) / (longint'(w) * w));
  endfunction
  function automatic int spike(int t, int t0, int w, int amp);   // triangular spike
    int h = w / 2;
    if (t < t0 || t >= t0 + w) return 0;
    return (t < t0 + h) ? amp * (t - t0) / h : amp * (t0 + w - t) / h;
  endfunction
  function automatic int ecg(int t);
    return bump(t, 100, 90, 120000)          // P
         + spike(t, 250, 20, -100000)          // Q
         + spike(t, 265, 40, 650000)           // R
         + spike(t, 300, 30, -250000)          // S
         + bump(t, 450, 180, 200000);        // T
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  task automatic period(int v_uv, int d);
    int p, u, l, e_code, e_phase, e_cmps, cmps = 0, seen = 0, ev_seen = 0;
    sample_kind_e e_kind;
    bit e_event;
    longint v;
    vin_p = v_uv / 2;
    vin_n = vin_p - v_uv;
    v = longint'(vin_p) - longint'(vin_n);
    delta = 10'(d);
    if (r_hist < 2 || r_restart || r_elapsed == (1 << TW)) begin
      e_kind  = (r_hist == 0) ? KIND_STARTUP :
                (r_hist == 1 || r_restart) ? KIND_RESTART : KIND_TS_LIMIT;
      e_code  = quant(v); e_cmps = N; e_phase = PH_SAR0 + N + 1;
    end else begin
      p = 2 * r_y1 - r_y0; u = clampi(p + d); l = clampi(p - d);
      if ((p + d) > MAXC || (p - d) < 0) n_clamp++;
      if (!(v > vdac(u)) && (v > vdac(l))) begin
        e_kind = KIND_PREDICTED; e_code = clampi(p); e_cmps = 2; e_phase = PH_SAR0;
      end else begin
        e_kind  = (v > vdac(u)) ? KIND_FAIL_HIGH : KIND_FAIL_LOW;
        e_code  = quant(v); e_cmps = N + 2; e_phase = PH_SAR0 + N + 1;
      end
    end
    e_event = (e_kind != KIND_PREDICTED && e_kind != KIND_RESTART);
    for (int c = 0; c < CPS; c++) begin
      if (vcomp) cmps++;
      else if (c != PH_SAMPLE) n_sleep++;
      if (out_valid) begin
        seen++;
        if (c != e_phase) fail($sformatf("result at phase %0d, want %0d", c, e_phase));
        if (int'(out_code) != e_code || out_kind != e_kind ||
            out_quantized != (e_kind != KIND_PREDICTED) || quant_pulse != out_quantized)
          fail($sformatf("result %0d %s, want %0d %s (v=%0d uV)",
                         out_code, out_kind.name(), e_code, e_kind.name(), v));
      end
      if (event_valid) begin
        ev_seen++;
        if (!e_event || int'(event_code) != e_code || int'(event_ts) != r_elapsed - 1)
          fail($sformatf("point %0d ts %0d, want %0d ts %0d",
                         event_code, event_ts, e_code, r_elapsed - 1));
      end
      @(negedge clk);
    end
    checks++;
    if (seen != 1) fail($sformatf("%0d results in one period", seen));
    checks++;
    if (ev_seen != int'(e_event)) fail("selected point missing or extra");
    checks++;
    if (cmps != e_cmps) fail($sformatf("%0d comparator clocks, want %0d", cmps, e_cmps));
    n_kind[e_kind]++;
    s_periods++; s_cmps += cmps; if (e_event) s_points++;
    r_y0 = r_y1; r_y1 = e_code;
    if (r_hist < 2) r_hist++;
    if (e_event) begin r_restart = 1; r_elapsed = 1; end
    else begin
      r_elapsed++;
      if (e_kind == KIND_RESTART) r_restart = 0;
    end
  endtask

  task automatic stats_reset();
    s_periods = 0; s_points = 0; s_cmps = 0;
  endtask
  task automatic stats_print(string name);
    // compression factor x100 = (periods*10) / (points*20) * 100
    $display("%s: %0d periods, %0d selected points, compression factor %0d.%02d, comparator clocks %0d%% of plain SAR",
             name, s_periods, s_points, (s_periods * 50) / s_points / 100,
             (s_periods * 50) / s_points % 100, (s_cmps * 100) / (s_periods * N));
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vin_p = 0; vin_n = 0; delta = 10'd51;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Delta = 50 mV = 51 LSB of 0.977 mV
    stats_reset();
    for (int b = 0; b < 3; b++)
      for (int t = 0; t < 1000; t++)
        period(ecg(t) + int'($urandom_range(2000)) - 1000, 51);
    stats_print("ECG, Delta 50 mV");
    // Delta = 200 mV = 205 LSB
    stats_reset();
    for (int b = 0; b < 3; b++)
      for (int t = 0; t < 1000; t++)
        period(ecg(t) + int'($urandom_range(2000)) - 1000, 205);
    stats_print("ECG, Delta 200 mV");
    // flat input for longer than the 1024-period timestamp range
    for (int t = 0; t < 1500; t++) period(-300000, 51);
    // past the top of the range: window cut at the rail
    for (int t = 0; t < 200; t++) period(520000, 51);
    // and back down quickly
    for (int t = 0; t < 200; t++) period(520000 - 5000 * t, 51);

    foreach (n_kind[k]) begin
      checks++;
      if (n_kind[k] == 0) fail($sformatf("kind %s never seen", sample_kind_e'(k)));
    end
    checks++;
    if (n_clamp == 0) fail("window never clamped");
    checks++;
    if (n_sleep == 0) fail("comparator never slept");
    $display("mechanisms: predicted %0d fail_high %0d fail_low %0d restart %0d startup %0d ts_limit %0d clamped %0d sleep_clocks %0d",
             n_kind[0], n_kind[1], n_kind[2], n_kind[3], n_kind[4], n_kind[5], n_clamp, n_sleep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
