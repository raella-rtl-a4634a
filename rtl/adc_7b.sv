// adc_7b: behavioural model of one signed 7b ADC (analog, not synthesizable
// as such).
//
// The ADC's step is one unit of column sum, so it returns the seven least
// significant bits of in-range sums exactly and saturates at -64 / 63
// otherwise. When `en` is low the ADC is power-gated: it does not convert
// and `valid` stays low. One conversion per clock, result one clock later.
// The unit step, 7b range and power gating follow the paper; the one-clock
// latency is this design's choice.
module adc_7b
  import raella_pkg::*;
(
  input  logic      clk,
  input  logic      en,
  input  int        vin,
  output adc_code_t code,
  output logic      valid
);
  always_ff @(posedge clk) begin
    valid <= en;
    if (en) code <= adc_clamp(vin);
  end
endmodule
