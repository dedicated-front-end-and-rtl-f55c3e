// tb_time_merger: four input streams, each in time order, are offered with
// random gaps. Checks that every input item comes out exactly once, that each
// input's order is kept, and that when all items are waiting together the
// output is in time order (oldest first), and that each input taken is the
// oldest of the inputs valid in that cycle. The output acknowledge is random.
//
// Oldest-first merging by time slice follows the paper's event building; the
// exact selection rule is this design's.
module tb_time_merger;
  import mimac_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  time_tag_t time_now = 13'd5000;
  logic [N-1:0] in_valid, in_ack;
  hit_t in_hit [N];
  logic out_valid, out_ack = 0;
  hit_t out_hit;
  int checks = 0, failures = 0;
  hit_t src [N][$];
  hit_t outq [$];
  bit hold = 1;

  time_merger #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  // inputs change on the falling edge, from the queues as left by the last rising edge
  always @(negedge clk) for (int i = 0; i < N; i++) begin
    in_valid[i] <= !hold && src[i].size() > 0;
    in_hit[i]   <= (src[i].size() > 0) ? src[i][0] : '0;
  end
  // every acknowledged input must be the oldest of the inputs valid in that cycle
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < N; i++) if (in_ack[i] && in_valid[i]) begin
      for (int j = 0; j < N; j++) if (j != i && in_valid[j]) begin
        checks++;
        if (tag_age(time_now, in_hit[j].ttag) > tag_age(time_now, in_hit[i].ttag)) begin
          failures++; $display("FAIL input %0d taken before older input %0d", i, j);
        end
      end
    end
  end
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) if (in_ack[i]) void'(src[i].pop_front());
    if (out_valid && out_ack) outq.push_back(out_hit);
  end
  always @(negedge clk) out_ack <= out_valid && ($urandom % 4 != 0);

  initial begin
    int total = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) begin
      automatic int t = 1000 + $urandom % 10;
      for (int k = 0; k < 100; k++) begin
        t += $urandom % 5;
        src[i].push_back('{ttag: time_tag_t'(t), pos: pos_t'(i * 256 + k)});
        total++;
      end
    end
    @(negedge clk); hold = 0;
    while (outq.size() < total) begin
      @(negedge clk);
      if ($time > 100us) break;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (outq.size() != total) begin failures++; $display("FAIL count %0d", outq.size()); end
    for (int k = 1; k < outq.size(); k++) begin
      checks++;
      if (outq[k].ttag < outq[k-1].ttag) begin failures++; $display("FAIL order at %0d", k); end
    end
    begin
      int last [N] = '{default: -1};
      for (int k = 0; k < outq.size(); k++) begin
        automatic int s = outq[k].pos / 256;
        automatic int idx = outq[k].pos % 256;
        checks++;
        if (idx != last[s] + 1) begin failures++; $display("FAIL stream %0d order", s); end
        last[s] = idx;
      end
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
