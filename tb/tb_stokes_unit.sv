// tb_stokes_unit -- checks the Stokes equations of one sample set against an
// integer model, for the extreme corners and for random samples.
module tb_stokes_unit;
  import gem_pkg::*;
  import gem_ref_pkg::*;

  adc_set_t     s;
  stokes_prod_t p;
  int checks = 0, failures = 0;

  stokes_unit dut (.s, .p);

  task automatic check_set(input int a [4]);
    int e [4];
    for (int k = 0; k < 4; k++) s[k] = sample_t'(a[k]);
    #1;
    stokes_set(a, e);
    checks++;
    if (int'(p.i) != e[0] || int'(p.q) != e[1] || int'(p.u) != e[2] || int'(p.v) != e[3]) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH a=%0d,%0d,%0d,%0d got %0d %0d %0d %0d exp %0d %0d %0d %0d",
                 a[0], a[1], a[2], a[3], p.i, p.q, p.u, p.v, e[0], e[1], e[2], e[3]);
    end
  endtask

  initial begin
    int a [4];
    int corners [3] = '{-128, 127, 0};
    // All 81 corner combinations.
    for (int i0 = 0; i0 < 3; i0++) for (int i1 = 0; i1 < 3; i1++)
      for (int i2 = 0; i2 < 3; i2++) for (int i3 = 0; i3 < 3; i3++) begin
        a = '{corners[i0], corners[i1], corners[i2], corners[i3]};
        check_set(a);
      end
    // Figure-style example: square of 9 is 81.
    a = '{9, 0, 0, 0};
    check_set(a);
    repeat (5000) begin
      for (int k = 0; k < 4; k++) a[k] = int'($urandom_range(255)) - 128;
      check_set(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
