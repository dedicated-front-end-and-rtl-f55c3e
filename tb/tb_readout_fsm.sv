// tb_readout_fsm: fills a memory model (registered read, as the block RAM)
// with records of time tags and hit patterns, advances wr_ptr as if a writer
// appended them, and checks each emitted (time tag, position) against the
// expected list: every set bit, lowest channel first, time of the record
// start plus the index of the data word. acknowledge is random.
//
// The position encoding checked is the paper's Table 1; the lowest-channel-
// first order and the handshake are this design's.
module tb_readout_fsm;
  import mimac_pkg::*;
  logic clk = 0, rst = 1, acknowledge = 0;
  logic [10:0] wr_ptr = 0, rd_ptr;
  logic [9:0] raddr;
  logic [17:0] rdata;
  logic data_available;
  time_tag_t time_tag;
  pos_t position;
  logic [17:0] mem [1024];
  int checks = 0, failures = 0;
  typedef struct { time_tag_t t; pos_t p; } exp_t;
  exp_t expq [$];

  readout_fsm #(.ADDR_BITS(10), .SIDE_Y(1), .ASIC_ID(2), .GROUP_ID(3)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) rdata <= mem[raddr];

  always @(posedge clk) begin
    if (!rst && data_available && acknowledge) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = expq.pop_front();
        if (time_tag != e.t || position != e.p) begin
          failures++;
          if (failures < 10) $display("FAIL got %0d/%h exp %0d/%h", time_tag, position, e.t, e.p);
        end
      end
    end
  end
  always @(negedge clk) acknowledge <= ($urandom % 3) != 0;

  initial begin
    int wp = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 300; r++) begin
      time_tag_t t;
      int len;
      t = time_tag_t'($urandom);
      len = 1 + $urandom % 8;
      mem[wp % 1024] = {1'b1, 4'b0, t}; wp++;
      for (int i = 0; i < len; i++) begin
        logic [15:0] pat;
        pat = ($urandom % 4 == 0) ? 16'd0 : 16'($urandom) & 16'($urandom);
        mem[wp % 1024] = {2'b00, pat}; wp++;
        for (int c = 0; c < 16; c++)
          if (pat[c]) expq.push_back('{t: time_tag_t'(t + i), p: {3'b000, 1'b1, 2'd2, 2'd3, 4'b0, 4'(c)}});
      end
      @(negedge clk); wr_ptr = 11'(wp);
      // let the reader catch up when the buffer is nearly full
      while (((wp - int'(rd_ptr)) & 2047) > 900) @(negedge clk);
    end
    while (expq.size() != 0 && checks < 100000) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0 || rd_ptr != wr_ptr) begin failures++; $display("FAIL leftover %0d", expq.size()); end
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
