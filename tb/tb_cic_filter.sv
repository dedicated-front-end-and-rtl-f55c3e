// tb_cic_filter: random 10-bit samples (one every 8 clocks) and a full-scale
// step; the output after sample n must equal the double moving sum of 4
// samples of the input delayed by 3 samples:
//   y[n] = sum_{j=0..3} sum_{k=0..3} x[n-3-j-k].
//
// The paper names a CIC filter only; order, delay and latency checked here are
// this design's.
module tb_cic_filter;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [9:0] din = 0;
  logic [13:0] dout;
  int x [$];
  int checks = 0, failures = 0;

  cic_filter #(.IN_BITS(10), .ORDER(2), .DIFF_DELAY(4)) dut (.*);
  always #5 clk = ~clk;

  function automatic int xs(int i);
    return (i < 0) ? 0 : x[i];
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int e = 0;
      din = (n >= 1000 && n < 1100) ? 10'd1023 : 10'($urandom);
      x.push_back(int'(din));
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int j = 0; j < 4; j++) for (int k = 0; k < 4; k++) e += xs(n - 3 - j - k);
      checks++;
      if (int'(dout) != e) begin failures++; if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, dout, e); end
      repeat (7) @(negedge clk);
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
