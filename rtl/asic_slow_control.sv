// asic_slow_control: slow serial configuration interface of the front-end ASIC.
//
// A shift register of N_CH*(1+DAC_BITS) bits is loaded on sc_clk while sc_en is
// high, and copied to the active configuration on a sc_clk edge with sc_load
// high. For each channel the frame holds the enable bit followed by the DAC code,
// MSB first; channel N_CH-1 is shifted in first, so channel 0 ends up nearest
// sc_din. sc_dout is the far end of the shift register and lets several ASICs be
// daisy-chained. The paper says only that a slow serial link sets the 64 five-bit
// DACs and enables or disables each channel; the pin set, bit order and reset
// values (all channels enabled, code 0) are this design's choices.
module asic_slow_control #(
  parameter int unsigned N_CH     = 64,
  parameter int unsigned DAC_BITS = 5
) (
  input  logic                     sc_clk,
  input  logic                     rst,
  input  logic                     sc_en,
  input  logic                     sc_din,
  input  logic                     sc_load,
  output logic                     sc_dout,
  output logic [DAC_BITS-1:0]      dac_code [N_CH],
  output logic [N_CH-1:0]          ch_enable
);
  localparam int unsigned FB = 1 + DAC_BITS;  // bits per channel
  localparam int unsigned NB = N_CH * FB;

  logic [NB-1:0] shreg;

  always_ff @(posedge sc_clk) begin
    if (rst) begin
      shreg <= '0;
    end else if (sc_en) begin
      shreg <= {shreg[NB-2:0], sc_din};
    end
  end

  assign sc_dout = shreg[NB-1];

  always_ff @(posedge sc_clk) begin
    if (rst) begin
      ch_enable <= '1;
      for (int c = 0; c < N_CH; c++) dac_code[c] <= '0;
    end else if (sc_load) begin
      for (int c = 0; c < N_CH; c++) begin
        // channel c occupies bits [c*FB +: FB]: enable at the top, DAC below
        ch_enable[c] <= shreg[c*FB + DAC_BITS];
        dac_code[c]  <= shreg[c*FB +: DAC_BITS];
      end
    end
  end
endmodule
