// raw_position_memory: the 1024 x 18 raw position buffer of one group.
//
// Simple dual-port RAM: one write port, one read port with a registered
// (one-cycle) read, as an FPGA block RAM provides. Size from the paper; the
// port style is this design's choice.
module raw_position_memory #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 18,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
