// tb_lcs_predictor -- self-checking test of the extrapolation predictor.
// Drives corner cases (rails, zero Delta, largest Delta) and random codes,
// and compares pred/upper/lower and the clamp flags with an integer model
// of pred = 2*y1 - y0, pred +/- Delta, each clamped to [0, 1023].
module tb_lcs_predictor;
  localparam int N = 10, DW = 10, MAXC = (1 << N) - 1;

  logic [N-1:0]  y1, y0, pred, upper, lower;
  logic [DW-1:0] delta;
  logic          upper_clamped, lower_clamped;
  int checks = 0, failures = 0;

  lcs_predictor #(.N(N), .DW(DW)) dut (.*);

  function automatic int clampi(int v);
    return (v < 0) ? 0 : (v > MAXC) ? MAXC : v;
  endfunction

  task automatic check(int a1, int a0, int d);
    int p, u, l;
    y1 = N'(a1); y0 = N'(a0); delta = DW'(d);
    #1;
    p = 2 * a1 - a0; u = p + d; l = p - d;
    checks++;
    if (pred !== N'(clampi(p)) || upper !== N'(clampi(u)) || lower !== N'(clampi(l)) ||
        upper_clamped !== (u > MAXC) || lower_clamped !== (l < 0)) begin
      failures++;
      if (failures < 10)
        $display("FAIL y1=%0d y0=%0d d=%0d: got p=%0d u=%0d l=%0d uc=%0b lc=%0b, want p=%0d u=%0d l=%0d",
                 a1, a0, d, pred, upper, lower, upper_clamped, lower_clamped,
                 clampi(p), clampi(u), clampi(l));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0, 0);
    check(MAXC, MAXC, 0);
    check(MAXC, 0, 0);      // extrapolates far above the range
    check(0, MAXC, 0);      // far below
    check(500, 400, 51);    // rising line
    check(400, 500, 51);    // falling line
    check(600, 600, 205);
    check(1000, 990, 51);   // upper edge cut
    check(10, 20, 51);      // lower edge cut
    check(512, 512, (1 << DW) - 1);
    for (int i = 0; i < 5000; i++)
      check($urandom_range(MAXC), $urandom_range(MAXC), $urandom_range((1 << DW) - 1));
    // small slopes around a random point, as in a smooth signal
    for (int i = 0; i < 2000; i++) begin
      automatic int b = $urandom_range(MAXC);
      check(clampi(b + $urandom_range(20) - 10), b, $urandom_range(100));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
