// tb_sar_logic -- self-checking test of the SAR register.
// An ideal comparator inside the testbench answers each trial with
// (target > trial), so the conversion must end with the largest code below
// the target level: result == target - 1 for target 1..1024, and 0 for 0.
// Also checks that busy lasts exactly N clocks, done comes one clock later,
// trial codes halve their step (MSB first), and start is ignored while busy.
module tb_sar_logic;
  localparam int N = 10;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0, cmp;
  logic [N-1:0] trial, result;
  logic         busy, done;
  int checks = 0, failures = 0;
  int target;  // level in "code + 1" units: input lies between target-1 and target

  sar_logic #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  assign cmp = (target > int'(trial));

  task automatic convert(int t, bit extra_start);
    int busy_cycles = 0, wait_cycles = 0, exp_bit;
    target = t;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = extra_start;  // a start while busy must be ignored
    exp_bit = N - 1;
    while (!done && wait_cycles < 3 * N) begin
      if (busy) begin
        busy_cycles++;
        // the bit under test is exactly one below the previous one
        checks++;
        if ((trial & ((1 << (exp_bit + 1)) - 1)) !== (1 << exp_bit)) begin
          failures++;
          $display("FAIL trial %b at bit %0d", trial, exp_bit);
        end
        exp_bit--;
      end
      wait_cycles++;
      @(negedge clk);
      start = 1'b0;
    end
    checks++;
    if (!done || busy_cycles != N) begin
      failures++;
      $display("FAIL timing: done=%0b busy cycles=%0d", done, busy_cycles);
    end
    checks++;
    if (int'(result) != ((t == 0) ? 0 : t - 1)) begin
      failures++;
      $display("FAIL target=%0d result=%0d", t, result);
    end
    @(negedge clk);
    checks++;
    if (done || busy) begin
      failures++;
      $display("FAIL done/busy not cleared");
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    target = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (busy || done) begin failures++; $display("FAIL busy after reset"); end
    convert(0, 0);
    convert(1, 0);
    convert(1024, 0);
    convert(512, 1);
    convert(513, 0);
    for (int i = 0; i < 300; i++) convert($urandom_range(1024), i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
