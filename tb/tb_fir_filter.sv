// tb_fir_filter: random 14-bit samples; the output after sample n must be
// floor((x[n] + 4x[n-1] + 6x[n-2] + 4x[n-3] + x[n-4]) / 16).
//
// The paper names an FIR filter only; the binomial taps are this design's.
module tb_fir_filter;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [13:0] din = 0, dout;
  int x [$];
  int checks = 0, failures = 0;
  int h [5] = '{1, 4, 6, 4, 1};

  fir_filter #(.IN_BITS(14)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int e = 0;
      din = 14'($urandom);
      x.push_back(int'(din));
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int k = 0; k < 5; k++) if (n - k >= 0) e += h[k] * x[n - k];
      e = e / 16;
      checks++;
      if (int'(dout) != e) begin failures++; if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, dout, e); end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
