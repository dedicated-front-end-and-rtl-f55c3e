// asic_serializer: the ASIC's 8-bit serializer.
//
// On each cycle with sample_en high it loads WIDTH parallel bits; on the
// following cycles it shifts them out, bit 0 first, one per 400 MHz clock. With
// sample_en every WIDTH cycles the line carries one sampled word per 20 ns slice:
// bit k of the word sampled at sample_en edge e is on ser_out during the cycle
// after edge e+k. The 8-bit width and 400 MHz rate are the paper's; the bit
// order is this design's choice.
module asic_serializer #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             sample_en,
  input  logic [WIDTH-1:0] par_in,
  output logic             ser_out
);
  logic [WIDTH-1:0] shreg;

  always_ff @(posedge clk) begin
    if (rst)            shreg <= '0;
    else if (sample_en) shreg <= par_in;
    else                shreg <= {1'b0, shreg[WIDTH-1:1]};
  end

  assign ser_out = shreg[0];
endmodule
