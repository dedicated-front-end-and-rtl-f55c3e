// deserializer: rebuilds the 16-bit hit word of one 16-channel group.
//
// Each group arrives on two serial lines (Fig. 6 of the paper: "LSB serial",
// "MSB serial"), channels 0-7 and 8-15, bit 0 first, one bit per 400 MHz cycle.
// Both lines are shifted in continuously; on the cycle with sample_en high the
// eighth bit of the previous slice is on the line, so the word is captured then
// and word_valid pulses in the next cycle with the word stable for a slice.
// Framing follows the shared sample enable: the link delay is assumed to be
// shorter than one bit, and no link training is modelled.
module deserializer #(
  parameter int unsigned WIDTH = 8
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               sample_en,
  input  logic               ser_lsb,
  input  logic               ser_msb,
  output logic [2*WIDTH-1:0] word,
  output logic               word_valid
);
  logic [WIDTH-1:0] sh_lsb, sh_msb;

  always_ff @(posedge clk) begin
    if (rst) begin
      sh_lsb     <= '0;
      sh_msb     <= '0;
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      sh_lsb     <= {ser_lsb, sh_lsb[WIDTH-1:1]};
      sh_msb     <= {ser_msb, sh_msb[WIDTH-1:1]};
      word_valid <= sample_en;
      if (sample_en)
        word <= {ser_msb, sh_msb[WIDTH-1:1], ser_lsb, sh_lsb[WIDTH-1:1]};
    end
  end
endmodule
