// tb_usb_bridge: two FIFO models with random contents and a USB side whose
// ready is random. Checks that each source's words arrive complete, in order,
// tagged with the right source, and that when both FIFOs hold data the
// sources alternate.
//
// The two FIFOs are the paper's; alternation and the source flag are this
// design's.
module tb_usb_bridge;
  logic clk = 0, rst = 1, pos_empty, en_empty, pos_rd, en_rd, usb_valid, usb_src, usb_ready = 0;
  logic [15:0] pos_dout, en_dout, usb_data;
  logic [15:0] pq [$], eq [$], pexp [$], eexp [$];
  int checks = 0, failures = 0, alt_ok = 0, both = 0;

  usb_bridge dut (.*);
  always #5 clk = ~clk;

  always_comb begin
    pos_empty = pq.size() == 0; pos_dout = pos_empty ? '0 : pq[0];
    en_empty  = eq.size() == 0; en_dout  = en_empty ? '0 : eq[0];
  end
  always @(posedge clk) if (!rst) begin
    if (pos_rd && en_rd) begin failures++; $display("FAIL both read"); end
    if (!pos_empty && !en_empty) begin
      both++;
      if ((pos_rd || en_rd) && (en_rd != dut.last_src ? 1 : 0)) alt_ok++;
    end
    if (pos_rd) void'(pq.pop_front());
    if (en_rd) void'(eq.pop_front());
    if (usb_valid && usb_ready) begin
      logic [15:0] e;
      checks++;
      if (usb_src) e = eexp.pop_front(); else e = pexp.pop_front();
      if (usb_data != e) begin failures++; if (failures < 10) $display("FAIL src %0d %h exp %h", usb_src, usb_data, e); end
    end
  end
  always @(negedge clk) usb_ready <= ($urandom % 4) != 0;

  initial begin
    for (int i = 0; i < 300; i++) begin
      automatic logic [15:0] w = 16'($urandom);
      pq.push_back(w); pexp.push_back(w);
    end
    for (int i = 0; i < 200; i++) begin
      automatic logic [15:0] w = 16'($urandom);
      eq.push_back(w); eexp.push_back(w);
    end
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (3000) @(negedge clk);
    checks++;
    if (pexp.size() != 0 || eexp.size() != 0) begin failures++; $display("FAIL leftovers"); end
    checks++;
    if (both == 0) failures++;
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
