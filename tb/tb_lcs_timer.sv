// tb_lcs_timer -- self-checking test of the timestamp counter.
// Runs sampling periods of 16 clocks with a tick on the last clock and marks
// random periods as selected points, at random clocks inside the period
// (including the tick clock). A counter in the testbench tracks the periods
// since the last point; ts must equal that count minus one, at_limit must be
// high exactly at ts = 2^TW-1. A short TW is used so the limit is reached.
module tb_lcs_timer;
  localparam int TW = 4, CPS = 16;

  logic          clk = 1'b0, rst_n = 1'b0, tick, event_in;
  logic [TW-1:0] ts;
  logic          at_limit;
  int checks = 0, failures = 0, limits = 0;
  int elapsed;  // periods since the last point, counting the current one

  lcs_timer #(.TW(TW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tick = 1'b0; event_in = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    elapsed = 1;
    for (int p = 0; p < 3000; p++) begin
      bit mark;
      int at;
      // a point is forced at the limit, otherwise chosen at random
      mark = (elapsed == (1 << TW)) || ($urandom_range(9) == 0);
      at   = $urandom_range(CPS - 1);
      for (int c = 0; c < CPS; c++) begin
        checks++;
        if (int'(ts) != elapsed - 1 || at_limit != (elapsed == (1 << TW))) begin
          failures++;
          if (failures < 10)
            $display("FAIL period %0d clk %0d: ts=%0d at_limit=%0b, elapsed=%0d",
                     p, c, ts, at_limit, elapsed);
        end
        if (at_limit) limits++;
        tick     = (c == CPS - 1);
        event_in = mark && (c == at);
        @(negedge clk);
      end
      tick = 1'b0; event_in = 1'b0;
      elapsed = mark ? 1 : elapsed + 1;
    end
    checks++;
    if (limits == 0) begin failures++; $display("FAIL limit never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
