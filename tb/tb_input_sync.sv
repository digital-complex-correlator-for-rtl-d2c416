// tb_input_sync -- ADC data change 7 ns after each clk edge; clk_skew lags clk
// by 2 ns so it samples in the middle of the data eye. Each sample must appear
// at the clk-domain outputs two clk edges after it was driven, unchanged.
module tb_input_sync;
  import gem_pkg::*;

  logic clk = 0, clk_skew = 0, rst_n = 0;
  adc_set_t in0, in1, out0, out1;
  adc_set_t hist0 [$], hist1 [$];
  int checks = 0, failures = 0;

  input_sync dut (.clk_skew, .clk, .rst_n, .adc_n0_in(in0), .adc_n1_in(in1),
                  .adc_n0(out0), .adc_n1(out1));

  always #5 clk = ~clk;
  initial begin #2; forever #5 clk_skew = ~clk_skew; end

  initial begin
    in0 = '0; in1 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; j < 2000; j++) begin
      @(posedge clk);
      // Check before driving: the value driven two edges ago (driven at j-2).
      #1;
      if (hist0.size() == 2) begin
        adc_set_t e0, e1;
        e0 = hist0.pop_front();
        e1 = hist1.pop_front();
        checks++;
        if (out0 !== e0 || out1 !== e1) begin
          failures++;
          if (failures < 10) $display("MISMATCH j=%0d got %h/%h exp %h/%h", j, out0, out1, e0, e1);
        end
      end
      #6;
      in0 = adc_set_t'({$urandom, $urandom});
      in1 = adc_set_t'({$urandom, $urandom});
      hist0.push_back(in0);
      hist1.push_back(in1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
