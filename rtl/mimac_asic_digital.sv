// mimac_asic_digital: digital part of the 64-channel front-end ASIC.
//
// The 64 comparator outputs (hits, from the analog channels: current
// preamplifier of gain 15, threshold comparator, 5-bit DAC) are masked by the
// per-channel enables and sampled every 20 ns (sample_en, the 50 MHz reference
// phase) by eight 8-bit serializers running at 400 MHz. Group g (channels
// 16g..16g+15) drives ser_out[2g] with channels 16g..16g+7 (its "LSB" line) and
// ser_out[2g+1] with channels 16g+8..16g+15 (its "MSB" line): 8 lines for 64
// channels, the factor-of-8 reduction of the paper. The slow serial interface
// sets the 64 DAC codes, which leave the digital part toward the analog DACs,
// and the channel enables. Masking before sampling is this design's choice;
// the enables cross from sc_clk as static configuration (they are only changed
// while the detector is not running).
module mimac_asic_digital
  import mimac_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   sample_en,
  input  logic [CH_PER_ASIC-1:0] hits,
  output logic [2*GROUPS-1:0]    ser_out,
  input  logic                   sc_clk,
  input  logic                   sc_en,
  input  logic                   sc_din,
  input  logic                   sc_load,
  output logic                   sc_dout,
  output logic [4:0]             dac_code [CH_PER_ASIC]
);
  logic [CH_PER_ASIC-1:0] ch_enable;
  logic [CH_PER_ASIC-1:0] masked;

  asic_slow_control #(.N_CH(CH_PER_ASIC), .DAC_BITS(5)) u_sc (
    .sc_clk, .rst, .sc_en, .sc_din, .sc_load, .sc_dout, .dac_code, .ch_enable);

  assign masked = hits & ch_enable;

  for (genvar s = 0; s < 2 * GROUPS; s++) begin : g_ser
    asic_serializer #(.WIDTH(SER_BITS)) u_ser (
      .clk, .rst, .sample_en, .par_in(masked[s*SER_BITS +: SER_BITS]), .ser_out(ser_out[s]));
  end
endmodule
