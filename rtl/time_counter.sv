// time_counter: the 13-bit time-slice counter of the FPGA (Fig. 6 of the paper).
//
// Counts slices (one per slice_en) while run is high; cleared while run is low;
// wraps at 2^WIDTH. Its value is the time tag of every recorded position. The
// width is the paper's; the meaning given to "run" (clear when low) is assumed.
module time_counter #(
  parameter int unsigned WIDTH = 13
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             slice_en,
  input  logic             run,
  output logic [WIDTH-1:0] time_now
);
  always_ff @(posedge clk) begin
    if (rst || !run)    time_now <= '0;
    else if (slice_en)  time_now <= time_now + 1'b1;
  end
endmodule
