// deinterleave -- second 2:1 interleave that gives the Stokes arithmetic 20 ns.
//
// At 100 MHz a square of an 8-bit sample does not settle within one cycle, so
// the samples of two consecutive cycles, times T and T+1, are held side by side
// for two cycles. A phase bit splits the 100 MHz cycles into pairs. In the first
// cycle of a pair the N0/N1 samples of all ADCs (time T) go into a hold
// register; at the end of the second cycle the held samples (T) and the current
// ones (T+1) are loaded together into the t1 and t2 pair registers, which then
// stay constant for 20 ns. Each ADC thus has four registers (e.g. for ADC1:
// r_adc1_n0_t1, r_adc1_n1_t1, r_adc1_n0_t2, r_adc1_n1_t2).
//
// The original design clocks the pair registers at 50 MHz, on both edges of a half-rate
// clock. Here the same registers run on the single 100 MHz clock with the
// clock enable ce20 (every other cycle), which is equivalent and keeps one
// clock domain; this substitution is this RTL's own choice.
//
// Timing: ce20 is high in the cycle whose closing edge loads a new pair.
// A downstream register that loads on that same edge sees a pair that has been
// stable for two cycles (a two-cycle path). pair_valid rises with the first
// pair after reset.
module deinterleave
  import gem_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  adc_set_t adc_n0,     // N0 samples, new every cycle
  input  adc_set_t adc_n1,     // N1 samples, new every cycle
  output adc_set_t n0_t1,      // N0 at time T
  output adc_set_t n1_t1,      // N1 at time T
  output adc_set_t n0_t2,      // N0 at time T+1
  output adc_set_t n1_t2,      // N1 at time T+1
  output logic     ce20,       // 50 MHz clock enable
  output logic     pair_valid  // the pair registers hold samples
);

  logic     phase;
  adc_set_t hold_n0, hold_n1;

  assign ce20 = phase;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      phase      <= 1'b0;
      hold_n0    <= '0;
      hold_n1    <= '0;
      n0_t1      <= '0;
      n1_t1      <= '0;
      n0_t2      <= '0;
      n1_t2      <= '0;
      pair_valid <= 1'b0;
    end else begin
      phase <= ~phase;
      if (!phase) begin
        hold_n0 <= adc_n0;
        hold_n1 <= adc_n1;
      end else begin
        n0_t1      <= hold_n0;
        n1_t1      <= hold_n1;
        n0_t2      <= adc_n0;
        n1_t2      <= adc_n1;
        pair_valid <= 1'b1;
      end
    end

  // The pair registers change only at the end of a ce20 cycle.
  a_pair_stable: assert property (@(posedge clk) disable iff (!rst_n)
    !ce20 |=> $stable(n0_t1) && $stable(n0_t2) && $stable(n1_t1) && $stable(n1_t2));

endmodule
