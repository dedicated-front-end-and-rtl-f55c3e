// csp_recorder: energy trigger and recorder for the filtered grid CSP signal.
//
// The paper arms the grid recording with the position trigger and starts the
// actual recording later, when the grid signal, which arrives with a different
// delay, shows a rising slope. Here:
//  * arm (a pulse, one per position record start) loads an arming window of
//    arm_len samples;
//  * while armed and idle, a sample y[n] with y[n] - y[n-SLOPE_DIST] >
//    slope_thr fires the trigger (slope condition, not a level threshold);
//  * the record is a header {3'b100, time of the trigger slice} followed by
//    REC_LEN filtered samples, of which PRE-1 precede the trigger sample.
// Samples go through a RING-entry circular buffer, so the pre-trigger samples
// and then the live samples are copied to the FIFO at up to one word per clock
// (eight per sample period). A record whose FIFO stalls long enough for the
// ring to overrun is cut short and ovf pulses. Window, threshold, distance,
// record length and format are this design's choices.
module csp_recorder
  import mimac_pkg::*;
#(
  parameter int unsigned DBITS      = 14,
  parameter int unsigned PRE        = 16,
  parameter int unsigned REC_LEN    = 256,
  parameter int unsigned SLOPE_DIST = 4,
  parameter int unsigned RING       = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic [DBITS-1:0] din,
  input  time_tag_t        time_now,
  input  logic             arm,
  input  logic [15:0]      arm_len,
  input  logic [DBITS-1:0] slope_thr,
  output logic             fifo_wr,
  output logic [15:0]      fifo_data,
  input  logic             fifo_full,
  output logic             armed,
  output logic             trigger,
  output logic             ovf
);
  localparam int unsigned RW = $clog2(RING);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DUMP} state_t;

  state_t            state;
  logic [DBITS-1:0]  ring [RING];
  logic [RW-1:0]     wp, rp;
  logic [15:0]       arm_cnt;
  logic [15:0]       left;
  time_tag_t         trig_time;
  logic [DBITS:0]    rise;

  assign armed   = arm_cnt != '0;
  assign rise    = {1'b0, din} - {1'b0, ring[wp - RW'(SLOPE_DIST)]};
  assign trigger = in_valid && armed && state == S_IDLE && !rise[DBITS] &&
                   rise[DBITS-1:0] > slope_thr;

  always_comb begin
    fifo_wr   = 1'b0;
    fifo_data = '0;
    if (state == S_HDR && !fifo_full) begin
      fifo_wr   = 1'b1;
      fifo_data = header_word(trig_time);
    end else if (state == S_DUMP && !fifo_full && rp != wp) begin
      fifo_wr   = 1'b1;
      fifo_data = 16'(ring[rp]);
    end
  end

  assign ovf = state == S_DUMP && in_valid && (wp - rp) == RW'(RING - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      wp        <= '0;
      rp        <= '0;
      arm_cnt   <= '0;
      left      <= '0;
      trig_time <= '0;
      for (int i = 0; i < RING; i++) ring[i] <= '0;
    end else begin
      if (in_valid) begin
        ring[wp] <= din;
        wp       <= wp + 1'b1;
      end
      if (arm)              arm_cnt <= arm_len;
      else if (trigger)     arm_cnt <= '0;
      else if (in_valid && armed) arm_cnt <= arm_cnt - 1'b1;

      unique case (state)
        S_IDLE: if (trigger) begin
          state     <= S_HDR;
          trig_time <= time_now;
          rp        <= wp - RW'(PRE - 1);
          left      <= 16'(REC_LEN);
        end
        S_HDR: if (fifo_wr) state <= S_DUMP;
        S_DUMP: begin
          if (ovf) state <= S_IDLE;
          else if (fifo_wr) begin
            rp   <= rp + 1'b1;
            left <= left - 1'b1;
            if (left == 16'd1) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
