// tb_deinterleave -- feeds a new sample set every clk cycle and checks that
// each pair load (the edge closing a ce20 cycle) puts the previous cycle's
// samples in t1 and the current ones in t2, that loads happen every second
// cycle only, and that the ADC1 N0 sequence 5, 8, 6, 7, 10, 2, 15, 11 becomes
// the pairs (5,8) (6,7) (10,2) (15,11).
module tb_deinterleave;
  import gem_pkg::*;

  logic clk = 0, rst_n = 0;
  adc_set_t a0, a1, n0_t1, n1_t1, n0_t2, n1_t2;
  logic ce20, pair_valid;
  adc_set_t prev0, prev1;
  int checks = 0, failures = 0, loads = 0;
  int seq [8] = '{5, 8, 6, 7, 10, 2, 15, 11};

  deinterleave dut (.clk, .rst_n, .adc_n0(a0), .adc_n1(a1),
                    .n0_t1, .n1_t1, .n0_t2, .n1_t2, .ce20, .pair_valid);

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL: %s", msg);
  endtask

  initial begin
    a0 = '0; a1 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      bit was_ce;
      adc_set_t cur0, cur1, old_t1, old_t2;
      @(negedge clk);
      prev0 = a0; prev1 = a1;
      if (c < 8) begin
        a0 = '0; a0[0] = sample_t'(seq[c]);
        a1 = '0; a1[0] = sample_t'(-seq[c]);
      end else begin
        a0 = adc_set_t'({$urandom, $urandom});
        a1 = adc_set_t'({$urandom, $urandom});
      end
      cur0 = a0; cur1 = a1;
      was_ce = ce20;
      old_t1 = n0_t1; old_t2 = n0_t2;
      checks++;
      if (c == 0 && ce20) fail("phase after reset");
      @(posedge clk); #1;
      checks++;
      if (was_ce) begin
        loads++;
        if (n0_t1 !== prev0 || n1_t1 !== prev1 || n0_t2 !== cur0 || n1_t2 !== cur1 || !pair_valid)
          fail($sformatf("pair at cycle %0d", c));
        if (c < 8 && (int'(n0_t1[0]) != seq[c-1] || int'(n0_t2[0]) != seq[c]))
          fail($sformatf("figure sequence at cycle %0d: %0d %0d", c, n0_t1[0], n0_t2[0]));
        if (ce20) fail("ce20 high two cycles in a row");
      end else begin
        if (n0_t1 !== old_t1 || n0_t2 !== old_t2) fail("pair changed outside a ce20 cycle");
        if (!ce20) fail("ce20 low two cycles in a row");
      end
    end
    checks++;
    if (loads != 1500) fail($sformatf("expected 1500 loads, saw %0d", loads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
