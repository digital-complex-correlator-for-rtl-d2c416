// tb_stokes_combiner -- drives random per-set Stokes values and checks the
// registered, saturated 19-bit period sums, the ce/in_valid gating and the
// one-strobe-per-two-cycles rate.
module tb_stokes_combiner;
  import gem_pkg::*;
  import gem_ref_pkg::*;

  logic clk = 0, rst_n = 0, ce = 0, in_valid = 0;
  stokes_prod_t p [4];
  stokes_raw_t  s;
  logic         s_valid;
  int checks = 0, failures = 0, strobes = 0, sat_seen = 0;

  stokes_combiner dut (.clk, .rst_n, .ce, .in_valid, .p, .s, .s_valid);

  always #5 clk = ~clk;

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  initial begin
    int e [4];
    for (int k = 0; k < 4; k++) p[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      ce = n[0];
      in_valid = (n > 20) && (n % 37 != 0);
      for (int k = 0; k < 4; k++) begin
        if (n % 50 < 4) begin           // extreme values: saturation of I and Q
          p[k].i = PROD_W'(65536); p[k].q = PROD_W'(65536);
          p[k].u = PROD_W'(-65280); p[k].v = PROD_W'(-32768);
        end else begin
          p[k].i = PROD_W'(rnd(0, 65536));
          p[k].q = PROD_W'(rnd(-65024, 65536));
          p[k].u = PROD_W'(rnd(-65280, 65280));
          p[k].v = PROD_W'(rnd(-32768, 32768));
        end
      end
      e[0] = sat19(int'(p[0].i) + int'(p[1].i) + int'(p[2].i) + int'(p[3].i));
      e[1] = sat19(int'(p[0].q) + int'(p[1].q) + int'(p[2].q) + int'(p[3].q));
      e[2] = sat19(int'(p[0].u) + int'(p[1].u) + int'(p[2].u) + int'(p[3].u));
      e[3] = sat19(int'(p[0].v) + int'(p[1].v) + int'(p[2].v) + int'(p[3].v));
      @(posedge clk); #1;
      checks++;
      if (s_valid !== (ce && in_valid)) begin
        failures++; $display("s_valid wrong at n=%0d", n);
      end
      if (ce && in_valid) begin
        strobes++;
        if (e[0] == 262143) sat_seen++;
        checks++;
        if (int'(s.i) != e[0] || int'(s.q) != e[1] || int'(s.u) != e[2] || int'(s.v) != e[3]) begin
          failures++;
          if (failures < 10) $display("MISMATCH n=%0d got %0d %0d %0d %0d exp %0d %0d %0d %0d",
                                      n, s.i, s.q, s.u, s.v, e[0], e[1], e[2], e[3]);
        end
      end
    end
    checks++;
    if (sat_seen == 0 || strobes < 1800 || strobes > 2000) begin
      failures++; $display("coverage: strobes=%0d saturations=%0d", strobes, sat_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
