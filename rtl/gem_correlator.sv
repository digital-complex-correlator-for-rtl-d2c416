// gem_correlator -- digital complex cross-correlator producing the four Stokes
// parameters of a dual circular polarisation receiver.
//
// Data path (one 100 MHz clock, clk):
//   input_sync       two-rank input register: clk_skew, then clk
//   deinterleave     samples of times T and T+1 held for 20 ns (ce20)
//   stokes_unit x4   I, Q, U, V of N0(T), N1(T), N0(T+1), N1(T+1)
//   stokes_combiner  sum of the four, 19 bits, one value per 20 ns
//   stokes_integrator x4  16 MSBs, then 2 x 256 accumulate-and-dump
//   isa_interface    8-bit ISA read slave, 8 data bytes + status
//
// Inputs: four ADCs, each giving two 8-bit two's complement samples, N0 and N1,
// per clk cycle (200 Ms/s): ADC1 Re(E_LCP), ADC2 Im(E_LCP), ADC3 Re(E_RCP),
// ADC4 Im(E_RCP). The ADCs, the phase shifter that makes clk_skew and the
// host PC are outside; their signals are ports. The ISA data bus is a value
// plus an output enable for an external tri-state pad.
//
// Timing at the default parameters: one Stokes value per 20 ns into the
// integrators, one integrated I, Q, U, V set per 2 x 2^16 = 131072 clk cycles
// (1.31 ms), announced by result_valid and by READY in the status byte.
// The block structure, widths and rates follow the original design; the single-clock
// form of the 50 MHz stage, reset, sample encoding and register map are this
// RTL's own choices.
module gem_correlator
  import gem_pkg::*;
#(
  parameter int         CNT_M_W   = 8,      // first integration stage: 2^CNT_M_W sums
  parameter int         CNT_N_W   = 8,      // second integration stage: 2^CNT_N_W sums
  parameter logic [7:0] BASE_ADDR = 8'h30   // ISA window at BASE_ADDR * 16
) (
  input  logic        clk,          // main 100 MHz clock
  input  logic        clk_skew,     // clk shifted to the centre of the ADC data eye
  input  logic        rst_n,        // asynchronous active-low reset
  input  adc_set_t    adc_n0,       // sample N0 of ADC1..ADC4
  input  adc_set_t    adc_n1,       // sample N1 of ADC1..ADC4
  input  logic [11:0] isa_a,
  input  logic        isa_iord_n,
  input  logic        isa_aen,
  output logic [7:0]  isa_d,
  output logic        isa_d_oe,
  output stokes_int_t result,       // latest integrated I, Q, U, V
  output logic        result_valid, // strobe: result just updated
  output logic [7:0]  status        // status byte (also readable over ISA)
);

  adc_set_t     s_n0, s_n1;
  adc_set_t     n0_t1, n1_t1, n0_t2, n1_t2;
  logic         ce20, pair_valid;
  stokes_prod_t prod [4];
  stokes_raw_t  raw;
  logic         raw_valid;
  logic [3:0]   mid_valid, out_valid;

  input_sync u_input_sync (
    .clk_skew, .clk, .rst_n,
    .adc_n0_in(adc_n0), .adc_n1_in(adc_n1),
    .adc_n0   (s_n0),   .adc_n1   (s_n1)
  );

  deinterleave u_deinterleave (
    .clk, .rst_n,
    .adc_n0(s_n0), .adc_n1(s_n1),
    .n0_t1, .n1_t1, .n0_t2, .n1_t2,
    .ce20, .pair_valid
  );

  stokes_unit u_stokes_n0_t1 (.s(n0_t1), .p(prod[0]));
  stokes_unit u_stokes_n1_t1 (.s(n1_t1), .p(prod[1]));
  stokes_unit u_stokes_n0_t2 (.s(n0_t2), .p(prod[2]));
  stokes_unit u_stokes_n1_t2 (.s(n1_t2), .p(prod[3]));

  stokes_combiner u_combiner (
    .clk, .rst_n,
    .ce(ce20), .in_valid(pair_valid),
    .p(prod), .s(raw), .s_valid(raw_valid)
  );

  stokes_integrator #(.CNT_M_W(CNT_M_W), .CNT_N_W(CNT_N_W)) u_int_i (
    .clk, .rst_n, .in_valid(raw_valid), .in(raw.i),
    .mid_valid(mid_valid[0]), .out_valid(out_valid[0]), .out(result.i));
  stokes_integrator #(.CNT_M_W(CNT_M_W), .CNT_N_W(CNT_N_W)) u_int_q (
    .clk, .rst_n, .in_valid(raw_valid), .in(raw.q),
    .mid_valid(mid_valid[1]), .out_valid(out_valid[1]), .out(result.q));
  stokes_integrator #(.CNT_M_W(CNT_M_W), .CNT_N_W(CNT_N_W)) u_int_u (
    .clk, .rst_n, .in_valid(raw_valid), .in(raw.u),
    .mid_valid(mid_valid[2]), .out_valid(out_valid[2]), .out(result.u));
  stokes_integrator #(.CNT_M_W(CNT_M_W), .CNT_N_W(CNT_N_W)) u_int_v (
    .clk, .rst_n, .in_valid(raw_valid), .in(raw.v),
    .mid_valid(mid_valid[3]), .out_valid(out_valid[3]), .out(result.v));

  // The four integrators see the same strobes and dump together.
  assign result_valid = out_valid[0];

  isa_interface #(.BASE_ADDR(BASE_ADDR)) u_isa (
    .clk, .rst_n,
    .result, .result_valid,
    .isa_a, .isa_iord_n, .isa_aen,
    .isa_d, .isa_d_oe,
    .status
  );

  a_integrators_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (&out_valid || !(|out_valid)) && (&mid_valid || !(|mid_valid)));

endmodule
