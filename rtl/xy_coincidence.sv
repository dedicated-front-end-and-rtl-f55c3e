// xy_coincidence: X/Y coincidence of one slice.
//
// The paper defines a coincidence as at least one strip fired on each side (X
// and Y) in the same sampling time. Inputs are the local triggers (OR of 16
// strips) of every group of each side; the output is combinational and is used
// in the same slice cycle by every group's position FSM.
module xy_coincidence #(
  parameter int unsigned N_X = 16,
  parameter int unsigned N_Y = 16
) (
  input  logic [N_X-1:0] trig_x,
  input  logic [N_Y-1:0] trig_y,
  output logic           coinc
);
  assign coinc = (|trig_x) && (|trig_y);
endmodule
