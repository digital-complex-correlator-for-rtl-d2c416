// stokes_unit -- Stokes parameters of one set of four ADC samples.
//
// With ADC1 = Re(E_LCP), ADC2 = Im(E_LCP), ADC3 = Re(E_RCP), ADC4 = Im(E_RCP):
//   I = a1^2 + a2^2 + a3^2 + a4^2
//   Q = 2 (a1 a3 + a2 a4)
//   U = 2 (a1 a4 - a2 a3)
//   V = a1^2 + a2^2 - a3^2 - a4^2
// The four squares are shared by I and V, so a unit needs eight 8x8
// multipliers; the correlator uses four units (N0 and N1 at times T and T+1),
// 32 multipliers in all. Samples are two's complement (this RTL's own choice).
// The unit is purely combinational; the register that samples its result is
// in stokes_combiner, on a two-cycle (20 ns) path.
//
// Result ranges: I in [0, 65536], Q in [-65024, 65536], U in [-65280, 65280],
// V in [-32768, 32768]; all fit the 18-bit signed outputs.
module stokes_unit
  import gem_pkg::*;
(
  input  adc_set_t     s,   // s[0] = ADC1 ... s[3] = ADC4
  output stokes_prod_t p
);

  localparam int MW = 2 * SAMPLE_W;

  sample_t a1, a2, a3, a4;
  logic signed [MW-1:0] sq1, sq2, sq3, sq4;     // squares
  logic signed [MW-1:0] p13, p24, p14, p23;     // cross products

  always_comb begin
    a1 = s[0];
    a2 = s[1];
    a3 = s[2];
    a4 = s[3];
    sq1 = a1 * a1;
    sq2 = a2 * a2;
    sq3 = a3 * a3;
    sq4 = a4 * a4;
    p13 = a1 * a3;
    p24 = a2 * a4;
    p14 = a1 * a4;
    p23 = a2 * a3;
    p.i = PROD_W'(sq1) + PROD_W'(sq2) + PROD_W'(sq3) + PROD_W'(sq4);
    p.q = (PROD_W'(p13) + PROD_W'(p24)) <<< 1;
    p.u = (PROD_W'(p14) - PROD_W'(p23)) <<< 1;
    p.v = PROD_W'(sq1) + PROD_W'(sq2) - PROD_W'(sq3) - PROD_W'(sq4);
  end

endmodule
