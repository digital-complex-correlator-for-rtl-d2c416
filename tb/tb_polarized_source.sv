// tb_polarized_source -- the correlator observing synthetic polarised signals.
//
// A complex noise field e (real and imaginary parts uniform in -40..40) is
// fed as E_LCP, and E_RCP = e * exp(j phi), rounded to integers. Then
// E_RCP E_LCP* = |e|^2 exp(j phi), so the Stokes parameters must give
// Q/I = cos(phi), U/I = sin(phi) and V = 0: a fully linearly polarised source
// whose angle is phi/2. Two further cases feed only LCP (V/I = +1) or only
// RCP (V/I = -1). For each case the integration is run with 2^6 x 2^6 periods
// per result and the third result of the case is checked (the first ones may
// straddle the change of case) against these ratios with a tolerance of 0.03.
// The expected values come from the physics of the input, not from a model of
// the logic.
module tb_polarized_source;
  import gem_pkg::*;

  localparam int M_W = 6, N_W = 6;
  localparam real PI = 3.14159265358979;
  localparam real TOL = 0.03;
  localparam int NCASES = 8;

  logic clk = 0, clk_skew = 0, rst_n = 0;
  adc_set_t adc_n0 = '0, adc_n1 = '0;
  logic [7:0] isa_d, status;
  logic isa_d_oe;
  stokes_int_t result;
  logic result_valid;

  gem_correlator #(.CNT_M_W(M_W), .CNT_N_W(N_W)) dut (
    .clk, .clk_skew, .rst_n, .adc_n0, .adc_n1,
    .isa_a(12'h000), .isa_iord_n(1'b1), .isa_aen(1'b0),
    .isa_d, .isa_d_oe, .result, .result_valid, .status);

  always #5 clk = ~clk;
  always @(clk) clk_skew <= #2 clk;

  int checks = 0, failures = 0;
  int cur_case = 0, results_in_case = 0;
  bit done = 0;

  // Case k < 6: linear polarisation, phi = k * 60 degrees.
  // Case 6: LCP only. Case 7: RCP only.
  function automatic adc_set_t make_set(input int k);
    adc_set_t s;
    int x, y, xr, yr;
    real phi;
    x = int'($urandom_range(80)) - 40;
    y = int'($urandom_range(80)) - 40;
    phi = real'(k) * PI / 3.0;
    xr = int'($rtoi(real'(x) * $cos(phi) - real'(y) * $sin(phi) + 100.5)) - 100;
    yr = int'($rtoi(real'(x) * $sin(phi) + real'(y) * $cos(phi) + 100.5)) - 100;
    if (k == 6) begin xr = 0; yr = 0; end
    if (k == 7) begin xr = x; yr = y; x = 0; y = 0; end
    s[0] = sample_t'(x);  s[1] = sample_t'(y);     // LCP
    s[2] = sample_t'(xr); s[3] = sample_t'(yr);    // RCP
    return s;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!done) begin
      @(posedge clk);
      #7;
      adc_n0 = make_set(cur_case);
      adc_n1 = make_set(cur_case);
    end
  end

  task automatic check_ratio(input real got, input real exp, input string what);
    checks++;
    if (got < exp - TOL || got > exp + TOL) begin
      failures++;
      $display("FAIL case %0d: %s = %f, expected %f", cur_case, what, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n && result_valid && !done) begin
    results_in_case++;
    if (results_in_case == 3) begin
      real i, q, u, v, phi;
      i = real'(result.i); q = real'(result.q); u = real'(result.u); v = real'(result.v);
      phi = real'(cur_case) * PI / 3.0;
      checks++;
      if (i < 500.0) begin
        failures++; $display("FAIL case %0d: I = %f too small", cur_case, i);
      end else if (cur_case < 6) begin
        check_ratio(q / i, $cos(phi), "Q/I");
        check_ratio(u / i, $sin(phi), "U/I");
        check_ratio(v / i, 0.0, "V/I");
      end else begin
        check_ratio(q / i, 0.0, "Q/I");
        check_ratio(u / i, 0.0, "U/I");
        check_ratio(v / i, cur_case == 6 ? 1.0 : -1.0, "V/I");
      end
      $display("case %0d: I=%0d Q/I=%f U/I=%f V/I=%f", cur_case, int'(result.i), q / i, u / i, v / i);
      results_in_case = 0;
      cur_case++;
      if (cur_case == NCASES) begin
        done = 1;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat ((2 << (M_W + N_W)) * 3 * NCASES + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
