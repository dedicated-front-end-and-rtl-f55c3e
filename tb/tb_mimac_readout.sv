// tb_mimac_readout: end-to-end test of the whole board at its default sizes
// (8 ASICs of 64 channels, 1024-word raw memories, 4096-word FIFOs, 256-sample
// energy records). Steps:
//  1. configures all eight ASICs through the daisy-chained slow serial link
//     (random DAC codes, a few disabled channels) and checks every DAC code;
//  2. runs recoil-like tracks with X/Y coincidence, X-only noise and a grid
//     pulse per track, with a randomly stalling USB side, and checks every
//     received (time tag, position) against the reference model, with the
//     disabled channels removed;
//  3. fires one X and one Y strip in every slice with the USB side stopped,
//     which fills the position FIFO and overflows the raw memories, then drains.
// Every mechanism (coincidence start, gap close, ignored non-coincident hit,
// channel masking, merging of several groups, USB back-pressure, FIFO full,
// raw memory overflow, energy slope trigger and record) is counted and must
// occur at least once.
//
// Runs with every parameter at its default. The mechanisms counted are the
// ones the paper describes, plus the overflow and back-pressure paths this
// design adds.
module tb_mimac_readout;
  import mimac_pkg::*;
  localparam int N_ASIC = 8;
  logic clk = 0, rst = 1, sc_clk = 0, sc_en = 0, sc_din = 0, sc_load = 0, sc_dout;
  logic run = 0, adc_sample, usb_valid, usb_src, usb_ready = 0, coinc, raw_ovf, energy_trig;
  logic [63:0] hits [N_ASIC], en_mask [N_ASIC];
  logic [4:0] dac_code [N_ASIC][64];
  logic [4:0] cfg_dac [N_ASIC][64];
  logic [7:0] gap_preset = 8'd4;
  logic [15:0] arm_len = 16'd64, usb_data;
  logic [13:0] slope_thr = 14'd800;
  logic [9:0] adc_data;
  logic [1:0] mode = 0;
  int checks = 0, failures = 0, n_ovf = 0, n_etrig = 0, n_merge = 0, n_full = 0;
  bit stall_usb = 0, compare_req = 0;

  mimac_readout dut (
    .clk, .rst, .hits, .dac_code, .sc_clk, .sc_en, .sc_din, .sc_load, .sc_dout,
    .run, .gap_preset, .arm_len, .slope_thr, .adc_sample, .adc_data,
    .usb_valid, .usb_data, .usb_src, .usb_ready, .coinc, .raw_ovf, .energy_trig);

  tb_event_gen_check #(.N_ASIC(N_ASIC), .REC_LEN(256)) chk (
    .clk, .rst, .sample_en(adc_sample), .run, .gap_preset, .mode, .en_mask,
    .hits_drv(hits), .adc_data, .usb_valid, .usb_ready, .usb_data, .usb_src, .compare_req);

  always #1.25ns clk = ~clk;
  always #20ns sc_clk = ~sc_clk;

  always @(negedge clk) usb_ready <= !stall_usb && ($urandom % 4 != 0);
  always @(posedge clk) if (!rst) begin
    if (raw_ovf) n_ovf++;
    if (energy_trig) n_etrig++;
    if ($countones(dut.u_fpga.g_valid) > 1) n_merge++;
    if (dut.u_fpga.pf_full) n_full++;
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    for (int a = 0; a < N_ASIC; a++) begin
      en_mask[a] = '1;
      for (int c = 0; c < 64; c++) begin
        cfg_dac[a][c] = 5'($urandom);
        if ($urandom % 16 == 0) en_mask[a][c] = 1'b0;
      end
    end
    en_mask[0][5] = 1'b1;   // the strips fired in step 3 stay enabled
    en_mask[5][6] = 1'b1;
    repeat (3) @(negedge sc_clk);
    rst = 0;
    // the last ASIC of the chain is shifted first
    for (int a = N_ASIC - 1; a >= 0; a--)
      for (int c = 63; c >= 0; c--)
        for (int b = 5; b >= 0; b--) begin
          @(negedge sc_clk); sc_en = 1; sc_din = (b == 5) ? en_mask[a][c] : cfg_dac[a][c][b];
        end
    @(negedge sc_clk); sc_en = 0; sc_load = 1;
    @(negedge sc_clk); sc_load = 0;
    for (int a = 0; a < N_ASIC; a++) for (int c = 0; c < 64; c++) begin
      checks++;
      if (dac_code[a][c] != cfg_dac[a][c]) begin failures++; $display("FAIL dac asic %0d ch %0d", a, c); end
    end
    repeat (16) @(negedge clk);
    run = 1; mode = 1;
    repeat (8 * 4000) @(negedge clk);
    mode = 0;
    repeat (8 * 400) @(negedge clk);
    $display("tracks: fifo_full=%0d raw_ovf=%0d", n_full, n_ovf);
    compare_req = 1; @(negedge clk); compare_req = 0;
    stall_usb = 1; mode = 2;
    repeat (8 * 3000) @(negedge clk);
    mode = 0;
    stall_usb = 0;
    repeat (8 * 3000) @(negedge clk);
    run = 0;
    checks += chk.checks; failures += chk.failures;
    $display("events=%0d starts=%0d closes=%0d nocoinc=%0d masked=%0d merge=%0d backpressure=%0d fifo_full=%0d raw_ovf=%0d etrig=%0d erec=%0d",
             chk.n_events, chk.n_start, chk.n_close, chk.n_nocoinc, chk.n_masked, n_merge, chk.n_backpressure, n_full, n_ovf, n_etrig, chk.n_erec);
    need(chk.n_start, "record start on coincidence");
    need(chk.n_close, "record closed after gap");
    need(chk.n_nocoinc, "hit ignored without coincidence");
    need(chk.n_masked, "hit on a disabled channel");
    need(n_merge, "several groups merged");
    need(chk.n_backpressure, "USB back-pressure");
    need(n_full, "position FIFO full");
    need(n_ovf, "raw memory overflow");
    need(n_etrig, "energy slope trigger");
    need(chk.n_erec, "energy record read out");
    checks++;
    if (chk.n_eshort != 0) begin failures++; $display("FAIL %0d energy records of wrong length", chk.n_eshort); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
