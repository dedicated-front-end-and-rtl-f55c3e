// tb_mimac_fpga: the FPGA firmware with 8 ASICs modelled by the testbench
// (serial lines in the ASIC timing). Small raw memories (64 words) and FIFOs
// (256 words) make the overflow paths reachable quickly. Phases: tracks with
// a randomly stalling USB side, exact comparison of all positions; then a
// continuous hit pattern with the USB side stopped, which must fill the
// position FIFO and overflow the raw memories; then drain. Each mechanism
// (record start, gap close, ignored non-coincident hit, merge of several
// groups, USB back-pressure, FIFO full, raw memory overflow, energy trigger)
// is counted and must occur.
//
// The rules checked follow the paper; reduced sizes are used only to make the
// full and overflow paths quick to reach.
module tb_mimac_fpga;
  import mimac_pkg::*;
  localparam int N_ASIC = 8, REC_LEN = 64;
  logic clk = 0, rst = 1, run = 0, sample_en, usb_valid, usb_src, usb_ready = 0;
  logic coinc, raw_ovf, energy_trig;
  logic [7:0] gap_preset = 8'd4;
  logic [15:0] arm_len = 16'd64, usb_data;
  logic [13:0] slope_thr = 14'd800;
  logic [7:0] ser_in [N_ASIC];
  logic [9:0] adc_data;
  logic [63:0] hits_drv [N_ASIC], en_mask [N_ASIC], cur [N_ASIC];
  logic [1:0] mode = 0;
  int checks = 0, failures = 0, n_ovf = 0, n_etrig = 0, n_merge = 0, n_full = 0, k = 0;
  bit stall_usb = 0, compare_req = 0;

  mimac_fpga #(.N_ASIC(N_ASIC), .RAW_DEPTH(64), .FIFO_DEPTH(256), .REC_LEN(REC_LEN)) dut (
    .clk, .rst, .run, .gap_preset, .arm_len, .slope_thr, .sample_en, .ser_in, .adc_data,
    .usb_valid, .usb_data, .usb_src, .usb_ready, .coinc, .raw_ovf, .energy_trig);

  tb_event_gen_check #(.N_ASIC(N_ASIC), .REC_LEN(REC_LEN)) chk (
    .clk, .rst, .sample_en, .run, .gap_preset, .mode, .en_mask, .hits_drv, .adc_data,
    .usb_valid, .usb_ready, .usb_data, .usb_src, .compare_req);

  always #1.25ns clk = ~clk;
  initial for (int a = 0; a < N_ASIC; a++) begin en_mask[a] = '1; cur[a] = '0; end

  // ASIC serializer model: load at sample_en, bit k on the line k cycles later
  always @(posedge clk) begin
    if (sample_en) begin cur = hits_drv; k = 0; end else k++;
    #0.1ns;
    for (int a = 0; a < N_ASIC; a++) for (int s = 0; s < 8; s++) ser_in[a][s] = cur[a][s*8 + k % 8];
  end

  always @(negedge clk) usb_ready <= !stall_usb && ($urandom % 4 != 0);
  always @(posedge clk) if (!rst) begin
    if (raw_ovf) n_ovf++;
    if (energy_trig) n_etrig++;
    if ($countones(dut.g_valid) > 1) n_merge++;
    if (dut.pf_full) n_full++;
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    repeat (10) @(negedge clk);
    rst = 0;
    repeat (8) @(negedge clk);
    run = 1; mode = 1;
    repeat (8 * 3000) @(negedge clk);
    mode = 0;
    repeat (8 * 400) @(negedge clk);
    $display("phase1: fifo_full=%0d raw_ovf=%0d", n_full, n_ovf);
    compare_req = 1; @(negedge clk); compare_req = 0;
    // stress: continuous coincident hits with the USB side stopped
    stall_usb = 1; mode = 2;
    repeat (8 * 600) @(negedge clk);
    mode = 0;
    stall_usb = 0;
    repeat (8 * 600) @(negedge clk);
    run = 0;
    $display("events=%0d starts=%0d closes=%0d nocoinc=%0d merge=%0d backpressure=%0d fifo_full=%0d raw_ovf=%0d etrig=%0d erec=%0d",
             chk.n_events, chk.n_start, chk.n_close, chk.n_nocoinc, n_merge, chk.n_backpressure, n_full, n_ovf, n_etrig, chk.n_erec);
    checks += chk.checks; failures += chk.failures;
    need(chk.n_start, "record start on coincidence");
    need(chk.n_close, "record closed after gap");
    need(chk.n_nocoinc, "hit ignored without coincidence");
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
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
