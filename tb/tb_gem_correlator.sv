// tb_gem_correlator -- end-to-end test of the correlator with short
// integrations (2^3 x 2^3 periods of 20 ns per result).
//
// Random ADC samples are driven 7 ns after each clk edge, clk_skew lags clk by
// 2 ns. An integer model rebuilds what the chip sees: the sample driven after
// edge j reaches the pair registers at edge j+3 (two input ranks, one
// interleave rank), and the edges 2p and 2p+1 after reset form the period p
// (times T and T+1). For each period the model forms the four Stokes sums with
// 19-bit saturation and feeds four integrator models. Every result_valid
// strobe is compared with the model, and a host process reads the results over
// ISA: it polls the status byte, reads the eight data bytes when READY is set,
// once sleeps over two results to provoke OVERRUN, and makes reads the chip
// must ignore (another base address, AEN high).
//
// Mechanisms counted, each must occur: pair loads, saturated period sums,
// first-stage dumps, results, ISA data reads, status clears, overrun, ignored
// reads. Results are also checked for their spacing of 2 x 2^(M+N) cycles.
module tb_gem_correlator;
  import gem_pkg::*;
  import gem_ref_pkg::*;

  localparam int M_W = 3, N_W = 3;
  localparam int NRES = 6;
  localparam logic [7:0] K = 8'h30;
  localparam int PERIOD_CYCLES = 2 << (M_W + N_W);

  logic clk = 0, clk_skew = 0, rst_n = 0;
  adc_set_t adc_n0 = '0, adc_n1 = '0;
  logic [11:0] isa_a = '0;
  logic isa_iord_n = 1, isa_aen = 0;
  logic [7:0] isa_d, status;
  logic isa_d_oe;
  stokes_int_t result;
  logic result_valid;

  gem_correlator #(.CNT_M_W(M_W), .CNT_N_W(N_W), .BASE_ADDR(K)) dut (
    .clk, .clk_skew, .rst_n, .adc_n0, .adc_n1,
    .isa_a, .isa_iord_n, .isa_aen, .isa_d, .isa_d_oe, .result, .result_valid, .status);

  always #5 clk = ~clk;
  always @(clk) clk_skew <= #2 clk;

  int checks = 0, failures = 0;
  int n_pairs = 0, n_sat = 0, n_mid = 0, n_res = 0, n_isa_data = 0, n_clear = 0,
      n_overrun = 0, n_ignored = 0;
  longint cycle = 0, last_res_cycle = -1;
  stokes_int_t exp_res [$];      // model results, in order
  bit done = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- stimulus and model ----------------
  initial begin
    integ_model mi, mq, mu, mv;
    adc_set_t y0 [$], y1 [$];
    mi = new(M_W, N_W); mq = new(M_W, N_W); mu = new(M_W, N_W); mv = new(M_W, N_W);
    repeat (3) y0.push_back('0);
    repeat (3) y1.push_back('0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; !done; j++) begin
      adc_set_t x0, x1;
      @(posedge clk);            // edge j
      #7;
      if (j % 500 < 4) begin      // full-scale burst: I and Q saturate
        x0 = {N_ADC{sample_t'(-128)}};
        x1 = x0;
      end else begin
        x0 = adc_set_t'({$urandom, $urandom});
        x1 = adc_set_t'({$urandom, $urandom});
      end
      adc_n0 = x0; adc_n1 = x1;
      y0.push_back(x0); y1.push_back(x1);
      // The sample just pushed is seen at edge j+3; odd edges close a period.
      if ((j + 3) % 2 == 1) begin
        int p [4], s [4], a [4];
        bit md, od, mdx, odx;
        int oi, oq, ou, ov;
        stokes_int_t r;
        s = '{0, 0, 0, 0};
        for (int k = 0; k < 4; k++) begin
          adc_set_t set;
          case (k)
            0: set = y0[0];  1: set = y1[0];  2: set = y0[1];  default: set = y1[1];
          endcase
          for (int c = 0; c < 4; c++) a[c] = int'(set[c]);
          stokes_set(a, p);
          for (int c = 0; c < 4; c++) s[c] += p[c];
        end
        void'(y0.pop_front()); void'(y0.pop_front());
        void'(y1.pop_front()); void'(y1.pop_front());
        if (sat19(s[0]) != s[0] || sat19(s[1]) != s[1]) n_sat++;
        mi.push(sat19(s[0]), md, od, oi);
        mq.push(sat19(s[1]), mdx, odx, oq);
        mu.push(sat19(s[2]), mdx, odx, ou);
        mv.push(sat19(s[3]), mdx, odx, ov);
        if (od) begin
          r.i = INT_W'(oi); r.q = INT_W'(oq); r.u = INT_W'(ou); r.v = INT_W'(ov);
          exp_res.push_back(r);
        end
      end
    end
  end

  // ---------------- result port checks ----------------
  always @(posedge clk) if (rst_n) begin
    if (dut.ce20 && dut.pair_valid) n_pairs++;
    if (dut.u_int_i.mid_valid) n_mid++;
    if (result_valid) begin
      n_res++;
      check(exp_res.size() >= n_res, "result before the model had one");
      if (exp_res.size() >= n_res)
        check(result == exp_res[n_res-1],
              $sformatf("result %0d: got %h expected %h", n_res, result, exp_res[n_res-1]));
      if (last_res_cycle >= 0)
        check(cycle - last_res_cycle == PERIOD_CYCLES,
              $sformatf("results %0d cycles apart", cycle - last_res_cycle));
      last_res_cycle = cycle;
    end
  end

  // ---------------- ISA host ----------------
  task automatic isa_read(input logic [11:0] addr, input bit aen, output logic [7:0] d,
                          output bit driven);
    #3 isa_a = addr; isa_aen = aen;
    #5 isa_iord_n = 0;
    #40 driven = isa_d_oe; d = isa_d;
    isa_iord_n = 1;
    #12;
  endtask

  function automatic logic [7:0] byte_of(input stokes_int_t r, input int off);
    logic [15:0] w;
    case (off / 2)
      0: w = r.i;  1: w = r.q;  2: w = r.u;  default: w = r.v;
    endcase
    return off[0] ? w[7:0] : w[15:8];
  endfunction

  initial begin
    logic [7:0] d;
    bit driven;
    int seen;
    bit slept = 0;
    @(posedge rst_n);
    while (n_res < NRES) begin
      isa_read({K, 4'h8}, 0, d, driven);
      check(driven, "status read not answered");
      if (d[ST_OVERRUN]) n_overrun++;
      if (d[ST_READY]) begin
        n_clear++;
        seen = n_res;
        for (int off = 0; off < 8; off++) begin
          isa_read({K, 4'(off)}, 0, d, driven);
          n_isa_data++;
          // Compare with the model's value of the result latched at this time.
          if (n_res == seen)
            check(driven && d == byte_of(exp_res[n_res-1], off),
                  $sformatf("ISA byte %0d of result %0d: %h", off, n_res, d));
        end
        isa_read({K + 8'd1, 4'h0}, 0, d, driven);
        check(!driven, "answered another base address");
        isa_read({K, 4'h0}, 1, d, driven);
        check(!driven, "answered a DMA cycle (AEN high)");
        n_ignored += 2;
        if (!slept && n_res >= 2) begin   // let two results pass unread
          slept = 1;
          seen = n_res;
          wait (n_res == seen + 2);
          #100;
        end
      end
    end
    repeat (4) @(posedge clk);
    done = 1;
    check(exp_res.size() >= NRES, "model produced too few results");
    check(n_pairs > 0,    "no pair loads");
    check(n_sat > 0,      "no saturated period sum");
    check(n_mid >= NRES * (1 << N_W), "too few first-stage dumps");
    check(n_res == NRES,  "result count");
    check(n_isa_data > 0, "no ISA data reads");
    check(n_clear > 0,    "READY never seen");
    check(n_overrun > 0,  "OVERRUN never seen");
    check(n_ignored > 0,  "no ignored reads");
    $display("mechanisms: pairs=%0d saturations=%0d stage1_dumps=%0d results=%0d isa_bytes=%0d ready=%0d overrun=%0d ignored=%0d",
             n_pairs, n_sat, n_mid, n_res, n_isa_data, n_clear, n_overrun, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (PERIOD_CYCLES * (NRES + 4) + 2000) @(posedge clk);
    failures++;
    $display("watchdog: results=%0d", n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
