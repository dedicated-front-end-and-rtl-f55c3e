// time_merger: one stage of the first-level event building.
//
// Merges N streams of time-tagged positions into one. Each cycle in which the
// output register is free (empty, or being acknowledged), the valid input
// whose time tag is oldest is taken into it and acknowledged; age is measured
// modulo 2^13 against the running time counter, ties go to the lowest index.
// Because every input is itself in time order, positions of the same slice
// leave each stage together and in slice order, so repeated stages gather the
// data of one slice from ever more groups (the paper: state machines "search
// and aggregate data from the same time slice ... in several stages"). The
// oldest-first rule and the valid/acknowledge handshake are this design's
// choices; one word per cycle.
module time_merger
  import mimac_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic            clk,
  input  logic            rst,
  input  time_tag_t       time_now,
  input  logic [N-1:0]    in_valid,
  input  hit_t            in_hit [N],
  output logic [N-1:0]    in_ack,
  output logic            out_valid,
  output hit_t            out_hit,
  input  logic            out_ack
);
  logic                 take;
  logic                 any;
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;
  logic [SW-1:0]        sel;
  time_tag_t            best_age;

  always_comb begin
    any      = 1'b0;
    sel      = '0;
    best_age = '0;
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && (!any || tag_age(time_now, in_hit[i].ttag) > best_age)) begin
        any      = 1'b1;
        sel      = SW'(i);
        best_age = tag_age(time_now, in_hit[i].ttag);
      end
    end
  end

  assign take = any && (!out_valid || out_ack);

  always_comb begin
    in_ack = '0;
    if (take) in_ack[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_hit   <= '0;
    end else if (take) begin
      out_valid <= 1'b1;
      out_hit   <= in_hit[sel];
    end else if (out_ack) begin
      out_valid <= 1'b0;
    end
  end

  // an acknowledge is only meaningful while data is offered
  a_ack_valid: assert property (@(posedge clk) disable iff (rst) out_ack |-> out_valid);
endmodule
