// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used twice, as the position FIFO and the energy FIFO that the USB side
// reads. dout shows the oldest word whenever empty is low; rd pops it. A write
// while full and a read while empty are ignored. Depth and width are not given
// by the paper: 4096 x 16 is assumed.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rd,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  assign count = wp - rp;
  assign full  = count == (AW+1)'(DEPTH);
  assign empty = count == '0;
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr && !full) begin
        mem[wp[AW-1:0]] <= din;
        wp <= wp + 1'b1;
      end
      if (rd && !empty) rp <= rp + 1'b1;
    end
  end
endmodule
