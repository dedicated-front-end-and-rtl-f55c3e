// tb_asic_serializer: loads random bytes every 8 cycles (sample_en) and checks
// that bit k of each byte is on ser_out during the k-th cycle after the load
// edge, i.e. 8 bits per 20 ns slice at the 400 MHz bit rate.
//
// The 8:1 ratio is the paper's; the bit order checked is this design's.
module tb_asic_serializer;
  logic clk = 0, rst = 1, sample_en = 0, ser_out;
  logic [7:0] par_in = '0, cur = '0;
  int checks = 0, failures = 0, k = 0;

  asic_serializer #(.WIDTH(8)) dut (.*);
  always #1.25ns clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    #0.1ns rst = 0;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 8; i++) begin
        @(negedge clk);
        sample_en = (i == 0);
        if (i == 0) par_in = 8'($urandom);
        @(posedge clk);
        if (i == 0) begin cur = par_in; k = 0; end
        #0.1ns;
        checks++;
        if (ser_out != cur[k]) begin
          failures++;
          if (failures < 10) $display("FAIL slice %0d bit %0d", n, k);
        end
        k++;
      end
    end
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
