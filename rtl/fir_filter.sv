// fir_filter: 5-tap FIR smoothing filter after the CIC.
//
// y[n] = (x[n] + 4 x[n-1] + 6 x[n-2] + 4 x[n-3] + x[n-4]) / 16, a binomial
// low-pass of unit DC gain that keeps the rise of the CSP signal symmetric.
// One new output per in_valid, registered (the output after sample n is y[n]).
// The paper names an FIR filter only; the taps are this design's choice.
module fir_filter #(
  parameter int unsigned IN_BITS = 14
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [IN_BITS-1:0] din,
  output logic [IN_BITS-1:0] dout
);
  logic [IN_BITS-1:0] x [4];
  logic [IN_BITS+3:0] acc;

  assign acc = (IN_BITS+4)'(din) + 4 * (IN_BITS+4)'(x[0]) + 6 * (IN_BITS+4)'(x[1])
             + 4 * (IN_BITS+4)'(x[2]) + (IN_BITS+4)'(x[3]);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 4; i++) x[i] <= '0;
      dout <= '0;
    end else if (in_valid) begin
      x[0] <= din;
      for (int i = 1; i < 4; i++) x[i] <= x[i-1];
      dout <= acc[IN_BITS+3:4];
    end
  end
endmodule
