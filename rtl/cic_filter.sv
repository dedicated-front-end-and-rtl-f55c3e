// cic_filter: CIC filter on the grid CSP samples, without decimation.
//
// ORDER integrators followed by ORDER combs of differential delay DIFF_DELAY,
// all at the 50 MHz sample rate (in_valid). With no decimation the response is
// ORDER cascaded moving sums of DIFF_DELAY samples; gain DIFF_DELAY**ORDER, so
// the output width is IN_BITS + ORDER*log2(DIFF_DELAY) and the modular
// arithmetic of the integrators never loses the result. Each stage is one
// register, so the output after sample n is the filtered value of sample
// n-(2*ORDER-1). The paper names a CIC filter only; order, delay and the lack
// of decimation are this design's choices (decimation would coarsen the
// 20 ns time resolution of the recorded signal).
module cic_filter #(
  parameter int unsigned IN_BITS    = 10,
  parameter int unsigned ORDER      = 2,
  parameter int unsigned DIFF_DELAY = 4,
  localparam int unsigned OUT_BITS  = IN_BITS + ORDER * $clog2(DIFF_DELAY)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic [IN_BITS-1:0]  din,
  output logic [OUT_BITS-1:0] dout
);
  logic [OUT_BITS-1:0] integ [ORDER];
  logic [OUT_BITS-1:0] comb  [ORDER];
  logic [OUT_BITS-1:0] dl    [ORDER][DIFF_DELAY];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < ORDER; s++) begin
        integ[s] <= '0;
        comb[s]  <= '0;
        for (int d = 0; d < DIFF_DELAY; d++) dl[s][d] <= '0;
      end
    end else if (in_valid) begin
      integ[0] <= integ[0] + OUT_BITS'(din);
      for (int s = 1; s < ORDER; s++) integ[s] <= integ[s] + integ[s-1];
      comb[0] <= integ[ORDER-1] - dl[0][DIFF_DELAY-1];
      dl[0][0] <= integ[ORDER-1];
      for (int s = 1; s < ORDER; s++) begin
        comb[s]  <= comb[s-1] - dl[s][DIFF_DELAY-1];
        dl[s][0] <= comb[s-1];
      end
      for (int s = 0; s < ORDER; s++)
        for (int d = 1; d < DIFF_DELAY; d++) dl[s][d] <= dl[s][d-1];
    end
  end

  assign dout = comb[ORDER-1];
endmodule
