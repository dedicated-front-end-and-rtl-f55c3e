// slice_packer: writes the merged position stream into the position FIFO.
//
// Positions of one slice are preceded by a single header word {3'b100, time};
// a new header is written whenever the time tag of the incoming position
// differs from the last header. Position words keep the paper's 16-bit encoding
// (bits 15..13 at 0), so a slice with 2 X and 2 Y strips costs 4 position words
// (64 bits) plus one header. One FIFO word per cycle; the input is held while
// the FIFO is full. The header format is this design's choice.
module slice_packer
  import mimac_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  hit_t        in_hit,
  output logic        in_ack,
  output logic        fifo_wr,
  output logic [15:0] fifo_data,
  input  logic        fifo_full,
  output logic        new_slice
);
  logic      have_last;
  time_tag_t last_time;

  always_comb begin
    fifo_wr   = 1'b0;
    fifo_data = '0;
    in_ack    = 1'b0;
    new_slice = 1'b0;
    if (in_valid && !fifo_full) begin
      fifo_wr = 1'b1;
      if (!have_last || in_hit.ttag != last_time) begin
        fifo_data = header_word(in_hit.ttag);
        new_slice = 1'b1;
      end else begin
        fifo_data = in_hit.pos;
        in_ack    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      have_last <= 1'b0;
      last_time <= '0;
    end else if (new_slice) begin
      have_last <= 1'b1;
      last_time <= in_hit.ttag;
    end
  end
endmodule
