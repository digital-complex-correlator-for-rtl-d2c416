// accum_stage -- one accumulate-and-dump stage of the Stokes integrator.
//
// Every in_valid strobe adds the signed IN_W-bit input to an accumulator of
// IN_W + CNT_W bits and advances a CNT_W-bit counter. While the counter is not
// at its maximum the sum is fed back; when it reaches its maximum, the sum of
// the last 2^CNT_W inputs is dumped: its OUT_W most significant bits go to the
// output register (the mean of the inputs, when OUT_W = IN_W) and the
// accumulator restarts from zero. With IN_W = 16 and CNT_W = 8 the accumulator
// is 24 bits, as in the original design, and cannot overflow.
//
// Timing: out and out_valid update on the clock edge that takes the
// 2^CNT_W-th input; out_valid is a one-cycle strobe and out holds until the
// next dump. Reset clears counter, accumulator and output (this RTL's own choice).
module accum_stage #(
  parameter int IN_W  = 16,
  parameter int CNT_W = 8,
  parameter int OUT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out
);

  localparam int ACC_W = IN_W + CNT_W;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  logic [CNT_W-1:0]        cnt;
  logic signed [ACC_W-1:0] acc, sum;

  assign sum = acc + ACC_W'(in);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt       <= '0;
      acc       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (cnt != CNT_MAX) begin
          acc <= sum;
        end else begin
          acc       <= '0;
          out       <= sum[ACC_W-1 -: OUT_W];
          out_valid <= 1'b1;
        end
      end
    end

  initial assert (OUT_W <= ACC_W) else $error("OUT_W wider than the accumulator");

endmodule
