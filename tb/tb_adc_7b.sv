// tb_adc_7b: checks unit-step conversion of in-range sums, saturation at
// -64/63, the one-clock latency and power gating.
module tb_adc_7b;
  import raella_pkg::*;
  logic clk = 0, en = 0;
  int vin = 0;
  adc_code_t code;
  logic valid;
  int checks = 0, failures = 0;

  adc_7b dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      int v, expv;
      v = (i < 200) ? i - 100 : int'($urandom_range(0, 2000)) - 1000;
      expv = (v > 63) ? 63 : (v < -64) ? -64 : v;
      @(negedge clk);
      en = 1; vin = v;
      @(negedge clk);
      en = 0; vin = 12345;
      checks++;
      if (!valid || int'(code) != expv) begin
        failures++;
        $display("FAIL vin=%0d code=%0d expected %0d", v, code, expv);
      end
      @(negedge clk);
      checks++;
      if (valid || int'(code) != expv) begin   // gated: no conversion, code held
        failures++;
        $display("FAIL gated ADC converted");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
