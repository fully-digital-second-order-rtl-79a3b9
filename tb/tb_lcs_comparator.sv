// tb_lcs_comparator -- self-checking test of the dynamic comparator model.
// Applies random differential inputs and enable values before each falling
// edge and checks after it that out == en && (vin_p > vin_n), and that the
// output does not change on rising edges.
module tb_lcs_comparator;
  import lcs_pkg::*;

  logic   clk = 1'b0, en;
  uvolt_t vin_p, vin_n;
  logic   out;
  int checks = 0, failures = 0;

  lcs_comparator dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic exp;
      @(posedge clk);
      #1;
      en    = ($urandom_range(3) != 0);
      vin_p = uvolt_t'($urandom_range(2000)) - 1000;
      vin_n = (i % 7 == 0) ? vin_p : uvolt_t'($urandom_range(2000)) - 1000;
      exp   = en && (vin_p > vin_n);
      @(negedge clk);
      #1;
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL en=%0b p=%0d n=%0d out=%0b", en, vin_p, vin_n, out);
      end
      // inputs change before the rising edge; output must hold
      vin_p = -vin_p;
      vin_n = -vin_n;
      @(posedge clk);
      #1;
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL output moved on rising edge");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
