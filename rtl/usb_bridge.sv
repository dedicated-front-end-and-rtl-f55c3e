// usb_bridge: FPGA side of the USB readout.
//
// Drains the position FIFO and the energy FIFO (first-word-fall-through) into
// one 16-bit word stream for the USB microcontroller, alternating between the
// two FIFOs word by word when both hold data. usb_src tells which FIFO a word
// came from (0 position, 1 energy); a word is transferred in a cycle where
// usb_valid and usb_ready are both high. The paper keeps position and energy
// in separate FIFOs for USB readout; the arbitration and stream format are this
// design's choices.
module usb_bridge (
  input  logic        clk,
  input  logic        rst,
  input  logic        pos_empty,
  input  logic [15:0] pos_dout,
  output logic        pos_rd,
  input  logic        en_empty,
  input  logic [15:0] en_dout,
  output logic        en_rd,
  output logic        usb_valid,
  output logic [15:0] usb_data,
  output logic        usb_src,
  input  logic        usb_ready
);
  logic last_src;   // source of the last word taken
  logic free;
  logic pick_en;

  assign free    = !usb_valid || usb_ready;
  // energy if only energy has data, or both have data and position went last
  assign pick_en = !en_empty && (pos_empty || !last_src);
  assign pos_rd  = free && !pos_empty && !pick_en;
  assign en_rd   = free && pick_en;

  always_ff @(posedge clk) begin
    if (rst) begin
      usb_valid <= 1'b0;
      usb_data  <= '0;
      usb_src   <= 1'b0;
      last_src  <= 1'b1;
    end else if (pos_rd || en_rd) begin
      usb_valid <= 1'b1;
      usb_data  <= en_rd ? en_dout : pos_dout;
      usb_src   <= en_rd;
      last_src  <= en_rd;
    end else if (usb_ready) begin
      usb_valid <= 1'b0;
    end
  end
endmodule
