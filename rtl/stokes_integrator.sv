// stokes_integrator -- time integration of one Stokes parameter.
//
// Three registers and two accumulators in cascade:
//   1. the 19-bit Stokes value of each 20 ns period is registered keeping its
//      16 most significant bits (the three LSBs are dropped on purpose);
//   2. a first accumulate-and-dump stage sums 2^CNT_M_W = 256 of them in a
//      24-bit accumulator and keeps the 16 MSBs (one value per 5.12 us);
//   3. a second, identical stage sums 256 of those and keeps the 16 MSBs,
//      giving one integrated value every 20 ns x 2^8 x 2^8 = 1.31 ms.
// Each stage keeps the mean of its inputs, so the final value is the mean of
// 65536 truncated Stokes values. The correlator uses one integrator per
// parameter (I, Q, U, V), each with its own counters.
//
// Timing: in is taken when in_valid is high (one strobe per 20 ns). out and
// out_valid follow the 2^(CNT_M_W+CNT_N_W)-th input after three register
// stages; out_valid is a one-cycle strobe, out holds until the next result.
// The structure and the widths 19/16/24/8 follow the original design; the counter
// widths are parameters so that simulations can use shorter integrations.
module stokes_integrator
  import gem_pkg::*;
#(
  parameter int CNT_M_W = 8,   // first stage sums 2^CNT_M_W values
  parameter int CNT_N_W = 8    // second stage sums 2^CNT_N_W values
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [STOKES_W-1:0] in,
  output logic                       mid_valid,  // first-stage dump strobe
  output logic                       out_valid,
  output logic signed [INT_W-1:0]    out
);

  logic                    in_reg_valid;
  logic signed [INT_W-1:0] in_reg;
  logic signed [INT_W-1:0] mid;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      in_reg       <= '0;
      in_reg_valid <= 1'b0;
    end else begin
      in_reg_valid <= in_valid;
      if (in_valid) in_reg <= in[STOKES_W-1 -: INT_W];
    end

  accum_stage #(.IN_W(INT_W), .CNT_W(CNT_M_W), .OUT_W(INT_W)) u_stage_m (
    .clk, .rst_n,
    .in_valid (in_reg_valid),
    .in       (in_reg),
    .out_valid(mid_valid),
    .out      (mid)
  );

  accum_stage #(.IN_W(INT_W), .CNT_W(CNT_N_W), .OUT_W(INT_W)) u_stage_n (
    .clk, .rst_n,
    .in_valid (mid_valid),
    .in       (mid),
    .out_valid(out_valid),
    .out      (out)
  );

endmodule
