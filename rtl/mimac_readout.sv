// mimac_readout: the MIMAC readout board, digital content.
//
// Eight front-end ASICs (digital parts: channel masking, 50 MHz sampling,
// 400 MHz serializers, slow-control register) feed the readout FPGA over
// 8 serial lines each: ASICs 0-3 read the 256 X strips, ASICs 4-7 the 256 Y
// strips. The analog front end (preamplifiers, comparators, threshold DACs),
// the PLLs, the LVDS pads, the flash ADC and the USB microcontroller are
// outside: hits[] are the comparator outputs, dac_code[] goes to the DACs,
// adc_data comes from the flash ADC, usb_* goes to the microcontroller, and
// the sc_* pins are the slow serial configuration link, daisy-chained through
// the eight ASICs (ASIC 0 first). The run controls (run, gap_preset, arm_len,
// slope_thr) stand for the slow-control settings of the FPGA.
//
// One clock: clk is the 400 MHz bit clock; the 50 MHz sample rate is the
// sample_en enable that the FPGA generates (also given to the flash ADC as
// adc_sample). sc_clk is the slow configuration clock.
//
// coinc, raw_ovf and energy_trig are status outputs (one-cycle pulses: X/Y
// coincidence in a slice, a raw position memory that had to drop a record,
// an energy trigger). The paper names no such monitor pins; bringing them out
// for monitoring is this design's choice.
module mimac_readout
  import mimac_pkg::*;
#(
  parameter int unsigned N_ASIC = 8
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [CH_PER_ASIC-1:0] hits [N_ASIC],
  output logic [4:0]             dac_code [N_ASIC][CH_PER_ASIC],
  input  logic                   sc_clk,
  input  logic                   sc_en,
  input  logic                   sc_din,
  input  logic                   sc_load,
  output logic                   sc_dout,
  input  logic                   run,
  input  logic [7:0]             gap_preset,
  input  logic [15:0]            arm_len,
  input  logic [13:0]            slope_thr,
  output logic                   adc_sample,
  input  logic [9:0]             adc_data,
  output logic                   usb_valid,
  output logic [15:0]            usb_data,
  output logic                   usb_src,
  input  logic                   usb_ready,
  output logic                   coinc,
  output logic                   raw_ovf,
  output logic                   energy_trig
);
  logic                sample_en;
  logic [2*GROUPS-1:0] ser [N_ASIC];
  logic [N_ASIC:0]     sc_chain;

  assign sc_chain[0] = sc_din;
  assign sc_dout     = sc_chain[N_ASIC];
  assign adc_sample  = sample_en;

  for (genvar a = 0; a < N_ASIC; a++) begin : g_asic
    mimac_asic_digital u_asic (
      .clk, .rst, .sample_en, .hits(hits[a]), .ser_out(ser[a]),
      .sc_clk, .sc_en, .sc_din(sc_chain[a]), .sc_load, .sc_dout(sc_chain[a+1]),
      .dac_code(dac_code[a]));
  end

  mimac_fpga #(.N_ASIC(N_ASIC)) u_fpga (
    .clk, .rst, .run, .gap_preset, .arm_len, .slope_thr, .sample_en,
    .ser_in(ser), .adc_data, .usb_valid, .usb_data, .usb_src, .usb_ready,
    .coinc, .raw_ovf, .energy_trig);
endmodule
