// asic_interface: the FPGA's interface to one 16-channel group (Fig. 6).
//
// deserializer -> 16-bit hit word every slice -> position_fsm (local trigger,
// delay, time/data multiplexer, write address) -> raw_position_memory
// (1024 x 18) -> readout_fsm (decoding into time-tagged positions). The time
// counter of Fig. 6 is shared by all groups and comes in as time_now; the X/Y
// coincidence is built outside from all groups' trig outputs and comes back in
// the same cycle as coinc. word_valid (one cycle after sample_en) is the slice
// strobe; the caller must advance time_now on the same strobe.
//
// The chain of blocks is the one drawn in the paper's group-management diagram;
// the shared time counter, the slice strobe timing and the valid/acknowledge
// handshake are this design's choices.
module asic_interface
  import mimac_pkg::*;
#(
  parameter int unsigned DEPTH    = 1024,
  parameter bit          SIDE_Y   = 1'b0,
  parameter int unsigned ASIC_ID  = 0,
  parameter int unsigned GROUP_ID = 0
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      sample_en,
  input  logic      run,
  input  logic      ser_lsb,
  input  logic      ser_msb,
  input  time_tag_t time_now,
  input  logic      coinc,
  input  logic [7:0] gap_preset,
  output logic      trig,
  output logic      slice_en,
  output logic      rec_start,
  output logic      rec_end,
  output logic      ovf,
  output logic      data_available,
  output time_tag_t time_tag,
  output pos_t      position,
  input  logic      acknowledge
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [15:0]         word;
  logic                we;
  logic [AW-1:0]       waddr, raddr;
  logic [RAW_BITS-1:0] wdata, rdata;
  logic [AW:0]         wr_ptr, rd_ptr;

  deserializer #(.WIDTH(SER_BITS)) u_deser (
    .clk, .rst, .sample_en, .ser_lsb, .ser_msb, .word, .word_valid(slice_en));

  position_fsm #(.ADDR_BITS(AW)) u_pos (
    .clk, .rst, .slice_en, .run, .word, .coinc, .time_now, .gap_preset, .rd_ptr,
    .trig, .we, .waddr, .wdata, .wr_ptr, .rec_start, .rec_end, .ovf);

  raw_position_memory #(.DEPTH(DEPTH), .WIDTH(RAW_BITS)) u_mem (
    .clk, .we, .waddr, .wdata, .raddr, .rdata);

  readout_fsm #(.ADDR_BITS(AW), .SIDE_Y(SIDE_Y), .ASIC_ID(ASIC_ID), .GROUP_ID(GROUP_ID)) u_rd (
    .clk, .rst, .wr_ptr, .rd_ptr, .raddr, .rdata, .data_available, .time_tag,
    .position, .acknowledge);
endmodule
