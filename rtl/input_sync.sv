// input_sync -- two-rank input register for the four ADC buses.
//
// Each ADC delivers two interleaved 8-bit samples (N0 and N1) per 100 MHz
// cycle. The first rank captures all 64 input bits with clk_skew, a copy of the
// main clock shifted so that its rising edge falls in the middle of the ADC
// data eye; the second rank re-registers them with the main clock clk, so that
// every sample is stable for one full clk cycle before the Stokes logic uses
// it. clk_skew and clk have the same frequency; the phase shifter that makes
// clk_skew lies outside this module.
//
// Latency: one clk_skew edge plus one clk edge. Both ranks follow the original design
// as described; the asynchronous active-low reset (clearing both ranks to zero)
// is this RTL's own choice.
module input_sync
  import gem_pkg::*;
(
  input  logic     clk_skew,   // capture clock, phase-aligned to the data eye
  input  logic     clk,        // main 100 MHz clock
  input  logic     rst_n,
  input  adc_set_t adc_n0_in,  // sample N0 of ADC1..ADC4 from the pads
  input  adc_set_t adc_n1_in,  // sample N1 of ADC1..ADC4 from the pads
  output adc_set_t adc_n0,     // N0 samples in the clk domain
  output adc_set_t adc_n1      // N1 samples in the clk domain
);

  adc_set_t skew_n0, skew_n1;

  always_ff @(posedge clk_skew or negedge rst_n)
    if (!rst_n) begin
      skew_n0 <= '0;
      skew_n1 <= '0;
    end else begin
      skew_n0 <= adc_n0_in;
      skew_n1 <= adc_n1_in;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      adc_n0 <= '0;
      adc_n1 <= '0;
    end else begin
      adc_n0 <= skew_n0;
      adc_n1 <= skew_n1;
    end

endmodule
