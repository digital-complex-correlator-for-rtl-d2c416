// tb_stokes_integrator -- full-size integrator (2^8 x 2^8) fed one random
// 19-bit value every second cycle. Checks every first-stage dump and every
// final result against an integer model, the count of 65536 inputs per result
// (1.31 ms at 20 ns per input) and the three-cycle latency from the last
// input to out_valid.
module tb_stokes_integrator;
  import gem_pkg::*;
  import gem_ref_pkg::*;

  localparam int M_W = 8, N_W = 8;
  localparam int PER_RESULT = 1 << (M_W + N_W);
  localparam int RESULTS = 3;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [STOKES_W-1:0] in = '0;
  logic mid_valid, out_valid;
  logic signed [INT_W-1:0] out;
  int checks = 0, failures = 0;
  int exp_mid [$], exp_out [$];
  int mids = 0, outs = 0;
  longint cycle = 0;
  longint last_in_cycle [$];   // cycle of the last input of each result

  stokes_integrator #(.CNT_M_W(M_W), .CNT_N_W(N_W)) dut (
    .clk, .rst_n, .in_valid, .in, .mid_valid, .out_valid, .out);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    integ_model m = new(M_W, N_W);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < RESULTS * PER_RESULT; n++) begin
      int v, o;
      bit md, od;
      int mode;
      mode = n / PER_RESULT;
      @(negedge clk);
      in_valid = 1;
      case (mode)
        0: v = int'($urandom_range(262143));                 // positive values (like I)
        1: v = int'($urandom_range(524287)) - 262144;        // full signed range
        default: v = -int'($urandom_range(262144));          // negative values
      endcase
      in = STOKES_W'(v);
      m.push(v, md, od, o);
      if (md) exp_mid.push_back(m.last_mid);
      if (od) begin
        exp_out.push_back(o);
        last_in_cycle.push_back(cycle);
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (mids != RESULTS * (1 << N_W) || outs != RESULTS) begin
      failures++; $display("dump counts: mid %0d out %0d", mids, outs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (mid_valid) begin
      int e;
      e = exp_mid.pop_front();
      mids++;
      checks++;
      if (int'(dut.mid) != e) begin
        failures++;
        if (failures < 10) $display("MID MISMATCH %0d: got %0d exp %0d", mids, dut.mid, e);
      end
    end
    if (out_valid) begin
      int e;
      longint lat;
      e = exp_out.pop_front();
      outs++;
      checks += 2;
      if (int'(out) != e) begin
        failures++; $display("OUT MISMATCH %0d: got %0d exp %0d", outs, out, e);
      end
      // Three register stages from the last input of the result to out.
      lat = cycle - last_in_cycle.pop_front();
      if (lat != 3) begin
        failures++; $display("latency %0d cycles, expected 3", lat);
      end
    end
  end

  initial begin
    repeat (RESULTS * PER_RESULT * 2 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
