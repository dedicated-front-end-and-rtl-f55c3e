// readout_fsm: "FSM data readout and decoding" of one group (Fig. 6).
//
// Reads the raw position memory in order, one word per visit (registered RAM
// read: the address is presented in S_FETCH and the word decoded in S_DECODE).
//  * time-tag word: loads the current slice time;
//  * data word: every set bit becomes one position word (encoding table of the
//    paper: side, ASIC, group, channel), lowest channel first, each with the
//    current time; afterwards the time advances by one slice. An empty pattern
//    only advances the time.
// Output handshake (signal names from Fig. 6): time_tag and position are valid
// while data_available is high and are consumed in a cycle where acknowledge is
// high. A pattern with k strips takes k+2 cycles, an empty one 2 cycles.
// Twelve position bits are constant in one instance: the zero fields of the
// encoding and the side/ASIC/group fields, which are fixed by parameters.
module readout_fsm
  import mimac_pkg::*;
#(
  parameter int unsigned ADDR_BITS = 10,
  parameter bit          SIDE_Y    = 1'b0,
  parameter int unsigned ASIC_ID   = 0,
  parameter int unsigned GROUP_ID  = 0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [ADDR_BITS:0]   wr_ptr,
  output logic [ADDR_BITS:0]   rd_ptr,
  output logic [ADDR_BITS-1:0] raddr,
  input  logic [RAW_BITS-1:0]  rdata,
  output logic                 data_available,
  output time_tag_t            time_tag,
  output pos_t                 position,
  input  logic                 acknowledge
);
  typedef enum logic [1:0] {S_FETCH, S_DECODE, S_EMIT} state_t;
  state_t      state;
  time_tag_t   cur_time;
  logic [15:0] pattern;
  logic [3:0]  ch;

  assign raddr = rd_ptr[ADDR_BITS-1:0];

  // lowest set bit of the pattern
  always_comb begin
    ch = '0;
    for (int i = 15; i >= 0; i--)
      if (pattern[i]) ch = 4'(i);
  end

  assign data_available = (state == S_EMIT);
  assign time_tag       = cur_time;
  assign position       = encode_pos(SIDE_Y, 2'(ASIC_ID), 2'(GROUP_ID), ch);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_FETCH;
      rd_ptr   <= '0;
      cur_time <= '0;
      pattern  <= '0;
    end else begin
      unique case (state)
        S_FETCH:  if (rd_ptr != wr_ptr) state <= S_DECODE;
        S_DECODE: begin
          rd_ptr <= rd_ptr + 1'b1;
          if (rdata[RAW_BITS-1]) begin
            cur_time <= rdata[TIME_BITS-1:0];
            state    <= S_FETCH;
          end else if (rdata[15:0] == '0) begin
            cur_time <= cur_time + 1'b1;
            state    <= S_FETCH;
          end else begin
            pattern <= rdata[15:0];
            state   <= S_EMIT;
          end
        end
        S_EMIT: if (acknowledge) begin
          pattern[ch] <= 1'b0;
          if ((pattern & ~(16'd1 << ch)) == '0) begin
            cur_time <= cur_time + 1'b1;
            state    <= S_FETCH;
          end
        end
        default: state <= S_FETCH;
      endcase
    end
  end
endmodule
