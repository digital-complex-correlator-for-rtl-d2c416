// stokes_combiner -- sum of the four sample sets of a 20 ns period.
//
// Adds the Stokes values of N0 and N1 at times T and T+1:
//   S = S_N0(T) + S_N1(T) + S_N0(T+1) + S_N1(T+1)
// for each of I, Q, U, V, and registers the 19-bit result on the clock-enable
// ce (one cycle in two). The inputs come combinationally from stokes_unit and
// from pair registers that changed two cycles earlier, so the multipliers and
// adders have 20 ns (a two-cycle path).
//
// The sums are formed with one spare bit and saturated to 19 bits. Only I and Q
// can leave the range, and only when all 16 products of the period reach
// +16384 (all samples at -128); this clipping is this RTL's own choice, the
// 19-bit width is that of the original design.
//
// Timing: s and s_valid update at the end of a cycle with ce = 1 and
// in_valid = 1; s_valid is a one-cycle strobe, one every 20 ns.
module stokes_combiner
  import gem_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ce,        // 50 MHz clock enable
  input  logic         in_valid,  // the sample pair behind p is real data
  input  stokes_prod_t p [4],     // N0(T), N1(T), N0(T+1), N1(T+1)
  output stokes_raw_t  s,
  output logic         s_valid
);

  localparam int SW = STOKES_W + 1;

  stokes_raw_t sum;

  always_comb begin
    sum.i = sat_stokes(SW'(p[0].i) + SW'(p[1].i) + SW'(p[2].i) + SW'(p[3].i));
    sum.q = sat_stokes(SW'(p[0].q) + SW'(p[1].q) + SW'(p[2].q) + SW'(p[3].q));
    sum.u = sat_stokes(SW'(p[0].u) + SW'(p[1].u) + SW'(p[2].u) + SW'(p[3].u));
    sum.v = sat_stokes(SW'(p[0].v) + SW'(p[1].v) + SW'(p[2].v) + SW'(p[3].v));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s       <= '0;
      s_valid <= 1'b0;
    end else begin
      s_valid <= ce && in_valid;
      if (ce && in_valid) s <= sum;
    end

endmodule
