// tb_sync_fifo: random pushes and pops against a queue model, with phases that
// fill the FIFO to full and drain it to empty; checks data, full, empty, count.
//
// The paper says only that FIFOs are used; the first-word-fall-through
// behaviour checked is this design's.
module tb_sync_fifo;
  localparam int D = 64;
  logic clk = 0, rst = 1, wr = 0, rd = 0, full, empty;
  logic [15:0] din = 0, dout;
  logic [6:0] count;
  logic [15:0] q [$];
  int checks = 0, failures = 0, nfull = 0;

  sync_fifo #(.WIDTH(16), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 6000; n++) begin
      automatic int pw = (n / 500) % 2 ? 30 : 70;
      @(negedge clk);
      checks++;
      if (full != (q.size() == D) || empty != (q.size() == 0) || count != 7'(q.size())) begin
        failures++; $display("FAIL flags n=%0d", n);
      end
      if (!empty) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("FAIL data"); end
      end
      if (full) nfull++;
      wr = ($urandom % 100) < pw; din = 16'($urandom);
      rd = ($urandom % 100) < 50;
      @(posedge clk);
      if (rd && q.size() > 0) void'(q.pop_front());
      if (wr && !full) q.push_back(din);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
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
