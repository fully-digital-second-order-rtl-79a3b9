// tb_lcs_control -- self-checking test of the digital control logic.
// The analog front end is replaced by an ideal comparator in the code
// domain: the input level x is kept in 1/16 LSB, constant over a sampling
// period, and the comparator answers cmp_en && (x > 16*dac_code). A
// reference model of the algorithm, written from the specification and not
// from the RTL, predicts every period's kind, code, selected point and
// timestamp. The input mixes flat stretches (one longer than the 1024-period
// timestamp range), ramps, steps, noise and rail-hugging parts, and Delta is
// changed between stretches. Checked per period: the result and its kind,
// the phase at which it appears (3 predicted, 14 quantized), the number of
// comparator-enabled clocks (2, 12 or 10), and selected points and their
// timestamps. Each mechanism must be seen at least once.
module tb_lcs_control;
  import lcs_pkg::*;
  localparam int N = 10, DW = 10, TW = 10, CPS = 16, MAXC = 1023;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [DW-1:0] delta;
  logic          sample, cmp_en, cmp_out;
  logic [N-1:0]  dac_code;
  logic          out_valid, out_quantized, event_valid, quant_pulse;
  logic [N-1:0]  out_code, event_code;
  sample_kind_e  out_kind;
  logic [TW-1:0] event_ts;
  logic          upper_clamped, lower_clamped;

  lcs_control #(.N(N), .DW(DW), .TW(TW), .CPS(CPS)) dut (.*);

  always #5 clk = ~clk;

  int x;  // input level in 1/16 LSB
  initial cmp_out = 1'b0;
  always @(negedge clk) cmp_out <= cmp_en && (x > 16 * int'(dac_code));

  int checks = 0, failures = 0;
  int n_kind[6];
  int n_clamp = 0, n_events = 0;

  // reference state
  int r_y1 = 0, r_y0 = 0, r_hist = 0, r_elapsed = 1;
  bit r_restart = 0;

  function automatic int clampi(int v);
    return (v < 0) ? 0 : (v > MAXC) ? MAXC : v;
  endfunction
  function automatic int quant(int lvl);  // largest code c with 16c < lvl
    int c = (lvl + 15) / 16 - 1;
    return clampi(c);
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  // Run one sampling period with input level lvl and check it
  task automatic period(int lvl, int d);
    int p, u, l, e_code, e_phase, e_cmps, cmps = 0, seen = 0, ev_seen = 0;
    sample_kind_e e_kind;
    bit e_event;
    x = lvl; delta = DW'(d);
    // reference decision
    if (r_hist < 2 || r_restart || r_elapsed == (1 << TW)) begin
      e_kind  = (r_hist == 0) ? KIND_STARTUP :
                (r_hist == 1 || r_restart) ? KIND_RESTART : KIND_TS_LIMIT;
      e_code  = quant(lvl);
      e_cmps  = N;
      e_phase = PH_SAR0 + N + 1;
    end else begin
      p = 2 * r_y1 - r_y0; u = clampi(p + d); l = clampi(p - d);
      if ((p + d) > MAXC || (p - d) < 0) n_clamp++;
      if (!(lvl > 16 * u) && (lvl > 16 * l)) begin
        e_kind = KIND_PREDICTED; e_code = clampi(p); e_cmps = 2; e_phase = PH_SAR0;
      end else begin
        e_kind  = (lvl > 16 * u) ? KIND_FAIL_HIGH : KIND_FAIL_LOW;
        e_code  = quant(lvl); e_cmps = N + 2; e_phase = PH_SAR0 + N + 1;
      end
    end
    e_event = (e_kind != KIND_PREDICTED && e_kind != KIND_RESTART);
    for (int c = 0; c < CPS; c++) begin
      if (cmp_en) cmps++;
      if (out_valid) begin
        seen++;
        if (c != e_phase) fail($sformatf("result at phase %0d, want %0d", c, e_phase));
        if (int'(out_code) != e_code || out_kind != e_kind ||
            out_quantized != (e_kind != KIND_PREDICTED) || quant_pulse != out_quantized)
          fail($sformatf("result code %0d kind %s, want %0d %s (lvl %0d)",
                         out_code, out_kind.name(), e_code, e_kind.name(), lvl));
      end
      if (event_valid) begin
        ev_seen++;
        if (!e_event || int'(event_code) != e_code || int'(event_ts) != r_elapsed - 1)
          fail($sformatf("point code %0d ts %0d, want %0d ts %0d",
                         event_code, event_ts, e_code, r_elapsed - 1));
      end
      @(negedge clk);
    end
    checks++;
    if (seen != 1) fail($sformatf("%0d results in one period", seen));
    checks++;
    if (ev_seen != int'(e_event)) fail("selected point missing or extra");
    checks++;
    if (cmps != e_cmps) fail($sformatf("%0d comparator clocks, want %0d (%s)",
                                       cmps, e_cmps, e_kind.name()));
    n_kind[e_kind]++;
    // reference update
    r_y0 = r_y1; r_y1 = e_code;
    if (r_hist < 2) r_hist++;
    if (e_event) begin n_events++; r_restart = 1; r_elapsed = 1; end
    else begin
      r_elapsed++;
      if (e_kind == KIND_RESTART) r_restart = 0;
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lvl;
    x = 0; delta = DW'(51);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // flat at mid scale, longer than the timestamp range
    for (int t = 0; t < 1100; t++) period(512 * 16 + 8, 20);
    // ramps of different slopes
    lvl = 300 * 16;
    for (int s = 0; s < 12; s++) begin
      automatic int slope = int'($urandom_range(160)) - 80;  // -5..+5 LSB per period
      for (int t = 0; t < 60; t++) begin
        lvl = lvl + slope;
        if (lvl < 16 * 20 || lvl > 16 * 1000) slope = -slope;
        period(lvl, 10 + s * 8);
      end
    end
    // steps and noise
    for (int t = 0; t < 600; t++) begin
      if (t % 50 == 0) lvl = 16 * $urandom_range(50, 970);
      period(lvl + int'($urandom_range(400)) - 200, 6);
    end
    // hugging the rails with steep slopes: window edges cut
    for (int t = 0; t < 200; t++) period(16 * 1024 - 4, 51);
    for (int t = 0; t < 100; t++) period(16 * (1023 - (t % 40) * 8) + 3, 120);
    for (int t = 0; t < 200; t++) period(2, 51);
    for (int t = 0; t < 100; t++) period(16 * ((t % 40) * 8) + 3, 120);
    // Delta = 0 never predicts
    for (int t = 0; t < 40; t++) period(16 * 700 + 5, 0);
    // random everything
    for (int t = 0; t < 800; t++) period($urandom_range(16 * 1024 - 1), $urandom_range(300));

    foreach (n_kind[k]) begin
      checks++;
      if (n_kind[k] == 0) fail($sformatf("kind %s never seen", sample_kind_e'(k)));
    end
    checks++;
    if (n_clamp == 0) fail("window never clamped");
    $display("kinds: predicted %0d fail_high %0d fail_low %0d restart %0d startup %0d ts_limit %0d; clamps %0d points %0d",
             n_kind[0], n_kind[1], n_kind[2], n_kind[3], n_kind[4], n_kind[5], n_clamp, n_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
