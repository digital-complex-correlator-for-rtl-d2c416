// gem_pkg -- types and constants shared by the C-band polarimetry correlator.
//
// The correlator takes four 8-bit ADC streams (real and imaginary part of the
// left- and right-hand circular polarisation fields, ADC1..ADC4), two samples
// per 100 MHz clock (N0 and N1), and forms the Stokes parameters I, Q, U, V.
// Widths follow the data path of the original design: 8-bit samples, 18-bit Stokes
// values of one sample set, 19-bit sums of four sample sets (the width at the
// input of the integrator), 16-bit integrated values.
//
// Sample encoding (two's complement) and the ISA register map are choices of
// this RTL; the widths 8, 19, 16 and 24 are those of the original design.
package gem_pkg;

  localparam int SAMPLE_W = 8;    // ADC sample width
  localparam int N_ADC    = 4;    // ADC1 Re(E_LCP), ADC2 Im(E_LCP), ADC3 Re(E_RCP), ADC4 Im(E_RCP)
  localparam int PROD_W   = 18;   // Stokes of one sample set (needs 17 bits + sign)
  localparam int STOKES_W = 19;   // sum of four sample sets, input of the integrator
  localparam int INT_W    = 16;   // integrated Stokes value, read over ISA as two bytes

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  // One sample of each ADC; element 0 is ADC1.
  typedef sample_t [N_ADC-1:0] adc_set_t;

  typedef struct packed {
    logic signed [PROD_W-1:0] i;
    logic signed [PROD_W-1:0] q;
    logic signed [PROD_W-1:0] u;
    logic signed [PROD_W-1:0] v;
  } stokes_prod_t;

  typedef struct packed {
    logic signed [STOKES_W-1:0] i;
    logic signed [STOKES_W-1:0] q;
    logic signed [STOKES_W-1:0] u;
    logic signed [STOKES_W-1:0] v;
  } stokes_raw_t;

  typedef struct packed {
    logic signed [INT_W-1:0] i;
    logic signed [INT_W-1:0] q;
    logic signed [INT_W-1:0] u;
    logic signed [INT_W-1:0] v;
  } stokes_int_t;

  // ISA register map, offset A[3:0] inside the 16-byte window.
  typedef enum logic [3:0] {
    REG_I_MSB  = 4'h0,
    REG_I_LSB  = 4'h1,
    REG_Q_MSB  = 4'h2,
    REG_Q_LSB  = 4'h3,
    REG_U_MSB  = 4'h4,
    REG_U_LSB  = 4'h5,
    REG_V_MSB  = 4'h6,
    REG_V_LSB  = 4'h7,
    REG_STATUS = 4'h8
  } isa_reg_e;

  // Status register bits.
  localparam int ST_READY   = 0;  // a new I,Q,U,V set was latched since the last status read
  localparam int ST_OVERRUN = 1;  // a set was latched while READY was still set

  // Saturate a (STOKES_W+1)-bit sum to STOKES_W bits.
  function automatic logic signed [STOKES_W-1:0] sat_stokes(input logic signed [STOKES_W:0] x);
    localparam logic signed [STOKES_W-1:0] MAXV = {1'b0, {(STOKES_W-1){1'b1}}};
    localparam logic signed [STOKES_W-1:0] MINV = {1'b1, {(STOKES_W-1){1'b0}}};
    // The two top bits differ only when the sum left the STOKES_W-bit range.
    if (x[STOKES_W] != x[STOKES_W-1]) return x[STOKES_W] ? MINV : MAXV;
    return x[STOKES_W-1:0];
  endfunction

endpackage
