// tb_slice_packer: feeds time-tagged positions (several per slice) with a
// randomly full FIFO and checks the FIFO word sequence: one header
// {3'b100,time} at each change of slice, followed by the positions.
//
// Positions are the paper's encoding; the header word is this design's.
module tb_slice_packer;
  import mimac_pkg::*;
  logic clk = 0, rst = 1, in_valid, in_ack, fifo_wr, fifo_full = 0, new_slice;
  hit_t in_hit;
  logic [15:0] fifo_data;
  int checks = 0, failures = 0;
  hit_t src [$];
  logic [15:0] expw [$], got [$];

  slice_packer dut (.*);
  always #5 clk = ~clk;

  always @(negedge clk) begin
    in_valid <= src.size() > 0;
    in_hit   <= (src.size() > 0) ? src[0] : '0;
  end
  always @(posedge clk) begin
    if (in_ack) void'(src.pop_front());
    if (fifo_wr && !rst) got.push_back(fifo_data);
  end
  always @(negedge clk) fifo_full <= ($urandom % 3) == 0;

  initial begin
    int t = 100;
    time_tag_t last = 0;
    bit first = 1;
    for (int s = 0; s < 200; s++) begin
      automatic int n = 1 + $urandom % 4;
      t += 1 + $urandom % 3;
      for (int k = 0; k < n; k++) begin
        hit_t h;
        h.ttag = time_tag_t'(t);
        h.pos  = pos_t'($urandom) & 16'h1F0F;
        src.push_back(h);
        if (first || h.ttag != last) expw.push_back({3'b100, h.ttag});
        expw.push_back(h.pos);
        first = 0; last = h.ttag;
      end
    end
    repeat (2) @(negedge clk);
    rst = 0;
    while (src.size() > 0 && $time < 100us) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (got.size() != expw.size()) begin failures++; $display("FAIL count %0d/%0d", got.size(), expw.size()); end
    for (int k = 0; k < got.size() && k < expw.size(); k++) begin
      checks++;
      if (got[k] != expw[k]) begin failures++; if (failures < 10) $display("FAIL word %0d %h exp %h", k, got[k], expw[k]); end
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
