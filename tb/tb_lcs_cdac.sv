// tb_lcs_cdac -- self-checking test of the capacitive DAC model.
// Samples random differential inputs, then sweeps codes while the input
// moves, and checks vout_p - vout_n == held input - Vdac(code), with
// Vdac(code) = -VREF + floor(code * 2*VREF / 1024), and that the held value
// does not follow the input while `sample` is low.
module tb_lcs_cdac;
  import lcs_pkg::*;
  localparam int N = 10;
  localparam longint VREF = 500000;

  logic         clk = 1'b0, sample;
  uvolt_t       vin_p, vin_n, vout_p, vout_n;
  logic [N-1:0] code;
  int checks = 0, failures = 0;

  lcs_cdac #(.N(N), .VREF_UV(500000)) dut (.*);

  always #5 clk = ~clk;

  function automatic longint vdac(int c);
    return (longint'(c) * 2 * VREF) / 1024 - VREF;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = 1'b0; code = '0; vin_p = 0; vin_n = 0;
    for (int s = 0; s < 200; s++) begin
      longint held;
      @(negedge clk);
      vin_p  = uvolt_t'($urandom_range(500000)) - 250000;
      vin_n  = uvolt_t'($urandom_range(500000)) - 250000;
      held   = longint'(vin_p) - longint'(vin_n);
      sample = 1'b1;
      @(negedge clk);
      sample = 1'b0;
      for (int k = 0; k < 20; k++) begin
        int c;
        c = (k == 0) ? 0 : (k == 1) ? 1023 : $urandom_range(1023);
        code  = N'(c);
        vin_p = uvolt_t'($urandom_range(500000));  // input moves, must not matter
        @(negedge clk);
        checks++;
        if (longint'(vout_p) - longint'(vout_n) != held - vdac(c)) begin
          failures++;
          if (failures < 10)
            $display("FAIL code %0d: diff %0d want %0d", c,
                     longint'(vout_p) - longint'(vout_n), held - vdac(c));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
