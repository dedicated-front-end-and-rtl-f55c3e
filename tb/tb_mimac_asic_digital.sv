// tb_mimac_asic_digital: configures the ASIC through its slow serial link
// (random DAC codes, a few channels disabled), checks the DAC codes, then
// drives random comparator outputs and deserializes the 8 serial lines in the
// testbench: every slice of every line must carry the sampled bits of its 8
// channels, with disabled channels at 0.
//
// The 4 groups of 16 channels, 8:1 serialization and per-channel enable are
// the paper's; the line order and the frame layout are this design's.
module tb_mimac_asic_digital;
  import mimac_pkg::*;
  logic clk = 0, rst = 1, sample_en = 0, sc_clk = 0, sc_en = 0, sc_din = 0, sc_load = 0, sc_dout;
  logic [63:0] hits = 0;
  logic [7:0] ser_out;
  logic [4:0] dac_code [64];
  logic [4:0] cfg_dac [64];
  logic [63:0] cfg_en;
  int checks = 0, failures = 0, masked_hits = 0, cyc = 0;
  logic [63:0] loaded = 0;
  logic [7:0] rx [8];
  bit configured = 0;

  mimac_asic_digital dut (.*);
  always #1.25ns clk = ~clk;
  always #20ns sc_clk = ~sc_clk;

  initial begin
    repeat (3) @(negedge sc_clk);
    rst = 0;
    for (int c = 63; c >= 0; c--) begin
      cfg_dac[c] = 5'($urandom);
      cfg_en[c]  = ($urandom % 5) != 0;
      for (int b = 5; b >= 0; b--) begin
        @(negedge sc_clk); sc_en = 1; sc_din = (b == 5) ? cfg_en[c] : cfg_dac[c][b];
      end
    end
    @(negedge sc_clk); sc_en = 0; sc_load = 1;
    @(negedge sc_clk); sc_load = 0;
    repeat (16) @(posedge clk);
    configured = 1;
    for (int c = 0; c < 64; c++) begin
      checks++;
      if (dac_code[c] != cfg_dac[c]) begin failures++; $display("FAIL dac %0d", c); end
    end
    // serial data check
    repeat (2000) @(posedge clk);
    checks++;
    if (masked_hits == 0) begin failures++; $display("FAIL no masked hit seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample enable one cycle in eight, hits change between samples
  always @(negedge clk) begin
    sample_en <= (cyc % 8) == 7;
    if ((cyc % 8) == 3) hits <= {$urandom, $urandom};
  end

  int k = 0;
  always @(posedge clk) begin
    cyc++;
    if (sample_en) begin
      // the previous slice is now complete on the lines
      if (configured) begin
        for (int s = 0; s < 8; s++) begin
          checks++;
          if (rx[s] != (loaded[s*8 +: 8] & cfg_en[s*8 +: 8])) begin
            failures++; if (failures < 10) $display("FAIL line %0d got %h exp %h", s, rx[s], loaded[s*8 +: 8] & cfg_en[s*8 +: 8]);
          end
        end
        if ((loaded & ~cfg_en) != 0) masked_hits++;
      end
      loaded = hits;
      k = 0;
    end
    #0.1ns;
    for (int s = 0; s < 8; s++) rx[s][k] = ser_out[s];
    k++;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
