// position_fsm: "FSM position management" of one 16-channel group (Fig. 6).
//
// It holds the group's local trigger (OR of the 16 strips), the one-slice delay
// register, the multiplexer between the delayed hit pattern and the time
// counter, and the write pointer of the raw position memory.
//
// Operation, one decision per slice (slice_en):
//  * IDLE: when the group has a hit and the X/Y coincidence is present in the
//    same slice, the start time is written ({1, time}) and the pattern goes into
//    the delay register. This is the paper's "start date + positions".
//  * REC: every slice writes the delayed pattern of the previous slice, so the
//    k-th data word after the time tag belongs to slice start+k-1+1 = start+k.
//    Empty slices inside a record are written too, which keeps that rule. The
//    record closes when gap_preset consecutive empty slices have been seen (the
//    paper's "preset number of clock cycles" without fired strips); the last
//    empty pattern is dropped.
//  * If the memory (DEPTH words, shared with the reader through rd_ptr) is full,
//    the record is closed, or not started, and ovf pulses.
// Trigger and coincidence follow the paper; the memory word layout, the
// inclusion of empty slices and the overflow rule are this design's choices.
module position_fsm
  import mimac_pkg::*;
#(
  parameter int unsigned ADDR_BITS = 10
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 slice_en,
  input  logic                 run,
  input  logic [15:0]          word,
  input  logic                 coinc,
  input  time_tag_t            time_now,
  input  logic [7:0]           gap_preset,
  input  logic [ADDR_BITS:0]   rd_ptr,
  output logic                 trig,
  output logic                 we,
  output logic [ADDR_BITS-1:0] waddr,
  output logic [RAW_BITS-1:0]  wdata,
  output logic [ADDR_BITS:0]   wr_ptr,
  output logic                 rec_start,
  output logic                 rec_end,
  output logic                 ovf
);
  typedef enum logic {S_IDLE, S_REC} state_t;
  state_t      state;
  logic [15:0] dly;
  logic [7:0]  gap;
  logic        full;
  logic [7:0]  gap_lim;

  assign trig    = |word;
  assign full    = (wr_ptr - rd_ptr) == (ADDR_BITS+1)'(1 << ADDR_BITS);
  assign waddr   = wr_ptr[ADDR_BITS-1:0];
  assign gap_lim = (gap_preset == 0) ? 8'd1 : gap_preset;

  // write-data multiplexer ("sel" in Fig. 6)
  always_comb begin
    we        = 1'b0;
    wdata     = '0;
    rec_start = 1'b0;
    rec_end   = 1'b0;
    ovf       = 1'b0;
    if (slice_en && run) begin
      if (state == S_IDLE) begin
        if (trig && coinc) begin
          if (full) ovf = 1'b1;
          else begin
            we        = 1'b1;
            wdata     = {1'b1, 4'b0000, time_now};
            rec_start = 1'b1;
          end
        end
      end else begin
        if (full) begin
          ovf     = 1'b1;
          rec_end = 1'b1;
        end else begin
          we      = 1'b1;
          wdata   = {2'b00, dly};
          rec_end = !trig && (gap + 8'd1 >= gap_lim);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      dly    <= '0;
      gap    <= '0;
      wr_ptr <= '0;
    end else begin
      if (we) wr_ptr <= wr_ptr + 1'b1;
      if (slice_en) begin
        if (!run) begin
          state <= S_IDLE;
        end else if (state == S_IDLE) begin
          if (rec_start) begin
            state <= S_REC;
            dly   <= word;
            gap   <= '0;
          end
        end else begin
          dly <= word;
          gap <= trig ? 8'd0 : gap + 8'd1;
          if (rec_end) state <= S_IDLE;
        end
      end
    end
  end
endmodule
