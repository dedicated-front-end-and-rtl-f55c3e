// tb_raw_position_memory: random writes and reads against an array model; the
// read data must appear one cycle after the address (registered read).
//
// 1024 x 18 is the paper's size; the registered read is this design's.
module tb_raw_position_memory;
  logic clk = 0, we = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [17:0] wdata = 0, rdata;
  logic [17:0] model [1024];
  bit          known [1024];
  int checks = 0, failures = 0;

  raw_position_memory #(.DEPTH(1024), .WIDTH(18)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wdata = 18'($urandom);
      model[a] = wdata; known[a] = 1;
    end
    for (int n = 0; n < 5000; n++) begin
      logic [9:0] ra;
      @(negedge clk);
      we = 1'($urandom); waddr = 10'($urandom); wdata = 18'($urandom);
      ra = 10'($urandom); raddr = ra;
      if (ra == waddr) we = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata != model[ra]) begin failures++; $display("FAIL addr %0d", ra); end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
