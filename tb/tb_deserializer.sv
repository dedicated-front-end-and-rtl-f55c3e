// tb_deserializer: drives the LSB and MSB lines with random 16-bit slice
// words in the serializer's timing (bit k during the k-th cycle after the
// sample_en edge) and checks that each word appears, whole, in the cycle where
// word_valid pulses one cycle after the next sample_en, i.e. one slice later.
//
// LSB/MSB lines are as in the paper's group diagram; the one-slice latency is
// this design's.
module tb_deserializer;
  logic clk = 0, rst = 1, sample_en = 0, ser_lsb = 0, ser_msb = 0;
  logic [15:0] word;
  logic word_valid;
  int checks = 0, failures = 0, nvalid = 0;
  logic [15:0] q [$];
  logic [15:0] cur = '0;

  deserializer #(.WIDTH(8)) dut (.*);
  always #1.25ns clk = ~clk;

  // line driver: after the edge with sample_en, bit 0 of cur, then bit 1 ...
  int k = 0;
  always @(posedge clk) begin
    if (sample_en) begin
      cur = 16'($urandom);
      q.push_back(cur);
      k = 0;
    end else k++;
    #0.1ns;
    ser_lsb = cur[k % 8];
    ser_msb = cur[8 + k % 8];
  end

  always @(negedge clk) sample_en <= ($time / 2.5ns) % 8 == 7;

  always @(posedge clk) if (!rst && word_valid) begin
    logic [15:0] e;
    #0.2ns;
    nvalid++;
    if (q.size() > 1) begin
      e = q.pop_front();
      checks++;
      if (word != e) begin failures++; $display("FAIL got %h exp %h", word, e); end
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    // the first captured word is the partial word in flight at reset
    wait (word_valid); @(posedge clk); void'(q.pop_front());
    repeat (8 * 300) @(posedge clk);
    checks++;
    if (nvalid < 290) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
