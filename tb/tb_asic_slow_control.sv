// tb_asic_slow_control: shifts a random configuration frame into the ASIC slow
// serial interface, loads it and compares every channel's DAC code and enable
// with the frame; then shifts a second frame and checks that sc_dout returns
// the first frame bit for bit (daisy-chain output). Checks reset values too.
//
// The paper gives only the contents (64 DAC codes, 64 enables); the frame
// layout checked is this design's.
module tb_asic_slow_control;
  localparam int N_CH = 64, DB = 5, FB = DB + 1;
  logic sc_clk = 0, rst = 1, sc_en = 0, sc_din = 0, sc_load = 0, sc_dout;
  logic [DB-1:0] dac_code [N_CH];
  logic [N_CH-1:0] ch_enable;
  int checks = 0, failures = 0;
  logic [DB-1:0] cfg_dac [N_CH];
  logic          cfg_en  [N_CH];
  logic          sent [$];

  asic_slow_control #(.N_CH(N_CH), .DAC_BITS(DB)) dut (.*);

  always #50 sc_clk = ~sc_clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic shift_frame();
    for (int c = N_CH - 1; c >= 0; c--) begin
      cfg_en[c]  = 1'($urandom);
      cfg_dac[c] = DB'($urandom);
      for (int b = DB; b >= 0; b--) begin
        logic bit_v;
        bit_v = (b == DB) ? cfg_en[c] : cfg_dac[c][b];
        @(negedge sc_clk); sc_en = 1; sc_din = bit_v;
        sent.push_back(bit_v);
      end
    end
    @(negedge sc_clk); sc_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge sc_clk);
    rst = 0;
    chk(ch_enable == '1, "reset enables");
    chk(dac_code[5] == '0, "reset dac");
    shift_frame();
    @(negedge sc_clk); sc_load = 1;
    @(negedge sc_clk); sc_load = 0;
    for (int c = 0; c < N_CH; c++) begin
      chk(dac_code[c] == cfg_dac[c], $sformatf("dac ch%0d", c));
      chk(ch_enable[c] == cfg_en[c], $sformatf("en ch%0d", c));
    end
    // second frame pushes the first one out of sc_dout, first bit first
    for (int i = 0; i < N_CH * FB; i++) begin
      logic exp_bit;
      exp_bit = sent.pop_front();
      @(negedge sc_clk);
      chk(sc_dout == exp_bit, $sformatf("dout bit %0d", i));
      sc_en = 1; sc_din = 1'($urandom);
    end
    @(negedge sc_clk); sc_en = 0;
    // without sc_load the active configuration stays unchanged
    chk(dac_code[0] == cfg_dac[0] && ch_enable[0] == cfg_en[0], "hold without load");
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
