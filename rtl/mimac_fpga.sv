// mimac_fpga: the readout FPGA firmware.
//
// Position path. N_ASIC ASICs (the first half on the X side, the rest on the
// Y side) each send 8 serial lines; each 16-channel group has its own
// asic_interface (deserializer, local trigger, position FSM, 1024 x 18 raw
// memory, readout FSM). A shared 13-bit time counter tags the slices, and the
// X/Y coincidence of all groups' local triggers decides when records start.
// Event building is a three-stage tree of time_merger: the 4 groups of an
// ASIC, the ASICs of a side, then X with Y. The merged stream is packed into
// the position FIFO as slice headers and positions.
//
// Energy path. The 10-bit flash ADC samples of the grid CSP signal, taken once
// per slice, go through a CIC and an FIR filter into csp_recorder, which is
// armed by any position record start and writes slope-triggered records into
// the energy FIFO. usb_bridge drains both FIFOs into one stream.
//
// Timing: sample_en is generated here, high one cycle in eight, and sent to all
// ASICs (common reference, so all ASICs sample the same slice). Groups see their
// words one cycle later (slice_en), when the time counter also advances.
//
// The paper gives the split into position and energy paths, the per-group
// processing, the coincidence, the staged event building, the CIC and FIR
// filters, the arming by the position trigger, the slope trigger and the two
// FIFOs. The merge tree shape, filter coefficients, FIFO sizes and all word
// formats are this design's own. The count outputs of the FIFOs, the packer's
// new_slice pulse and the recorder's armed/ovf flags are left unconnected on
// purpose: nothing in the board consumes them.
module mimac_fpga
  import mimac_pkg::*;
#(
  parameter int unsigned N_ASIC     = 8,
  parameter int unsigned RAW_DEPTH  = 1024,
  parameter int unsigned FIFO_DEPTH = 4096,
  parameter int unsigned REC_LEN    = 256,
  localparam int unsigned NG        = N_ASIC * GROUPS,
  localparam int unsigned NA_SIDE   = N_ASIC / 2
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  run,
  input  logic [7:0]            gap_preset,
  input  logic [15:0]           arm_len,
  input  logic [13:0]           slope_thr,
  output logic                  sample_en,
  input  logic [2*GROUPS-1:0]   ser_in [N_ASIC],
  input  logic [9:0]            adc_data,
  output logic                  usb_valid,
  output logic [15:0]           usb_data,
  output logic                  usb_src,
  input  logic                  usb_ready,
  output logic                  coinc,
  output logic                  raw_ovf,
  output logic                  energy_trig
);
  // ---------------- timing ----------------
  logic [2:0] phase;
  logic       slice_en;
  time_tag_t  time_now;

  always_ff @(posedge clk) begin
    if (rst) begin
      phase     <= '0;
      sample_en <= 1'b0;
    end else begin
      phase     <= phase + 1'b1;
      sample_en <= phase == 3'd7;
    end
  end

  // ---------------- group interfaces ----------------
  logic [NG-1:0] trig, g_slice, rec_start, rec_end, g_ovf, g_valid, g_ack;
  hit_t          g_hit [NG];

  for (genvar a = 0; a < N_ASIC; a++) begin : g_asic
    for (genvar g = 0; g < GROUPS; g++) begin : g_grp
      localparam int unsigned K = a * GROUPS + g;
      asic_interface #(
        .DEPTH(RAW_DEPTH), .SIDE_Y(a >= NA_SIDE), .ASIC_ID(a % NA_SIDE), .GROUP_ID(g)
      ) u_if (
        .clk, .rst, .sample_en, .run,
        .ser_lsb(ser_in[a][2*g]), .ser_msb(ser_in[a][2*g+1]),
        .time_now, .coinc, .gap_preset,
        .trig(trig[K]), .slice_en(g_slice[K]), .rec_start(rec_start[K]),
        .rec_end(rec_end[K]), .ovf(g_ovf[K]),
        .data_available(g_valid[K]), .time_tag(g_hit[K].ttag), .position(g_hit[K].pos),
        .acknowledge(g_ack[K]));
    end
  end

  assign slice_en = g_slice[0];
  assign raw_ovf  = |g_ovf;

  time_counter #(.WIDTH(TIME_BITS)) u_time (.clk, .rst, .slice_en, .run, .time_now);

  xy_coincidence #(.N_X(NG/2), .N_Y(NG/2)) u_coinc (
    .trig_x(trig[NG/2-1:0]), .trig_y(trig[NG-1:NG/2]), .coinc);

  // ---------------- event building tree ----------------
  logic [N_ASIC-1:0] a_valid, a_ack;
  hit_t              a_hit [N_ASIC];
  logic [1:0]        s_valid, s_ack;
  hit_t              s_hit [2];
  logic              m_valid, m_ack;
  hit_t              m_hit;

  for (genvar a = 0; a < N_ASIC; a++) begin : g_m1
    time_merger #(.N(GROUPS)) u_m (
      .clk, .rst, .time_now,
      .in_valid(g_valid[a*GROUPS +: GROUPS]), .in_hit(g_hit[a*GROUPS +: GROUPS]),
      .in_ack(g_ack[a*GROUPS +: GROUPS]),
      .out_valid(a_valid[a]), .out_hit(a_hit[a]), .out_ack(a_ack[a]));
  end

  for (genvar s = 0; s < 2; s++) begin : g_m2
    time_merger #(.N(NA_SIDE)) u_m (
      .clk, .rst, .time_now,
      .in_valid(a_valid[s*NA_SIDE +: NA_SIDE]), .in_hit(a_hit[s*NA_SIDE +: NA_SIDE]),
      .in_ack(a_ack[s*NA_SIDE +: NA_SIDE]),
      .out_valid(s_valid[s]), .out_hit(s_hit[s]), .out_ack(s_ack[s]));
  end

  time_merger #(.N(2)) u_m3 (
    .clk, .rst, .time_now, .in_valid(s_valid), .in_hit(s_hit), .in_ack(s_ack),
    .out_valid(m_valid), .out_hit(m_hit), .out_ack(m_ack));

  // ---------------- position FIFO ----------------
  logic        pf_wr, pf_full, pf_rd, pf_empty;
  logic [15:0] pf_din, pf_dout;

  slice_packer u_pack (
    .clk, .rst, .in_valid(m_valid), .in_hit(m_hit), .in_ack(m_ack),
    .fifo_wr(pf_wr), .fifo_data(pf_din), .fifo_full(pf_full), .new_slice());

  sync_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_pos_fifo (
    .clk, .rst, .wr(pf_wr), .din(pf_din), .full(pf_full),
    .rd(pf_rd), .dout(pf_dout), .empty(pf_empty), .count());

  // ---------------- energy path ----------------
  logic [9:0]  adc_q;
  logic [13:0] cic_y, fir_y;
  logic        ef_wr, ef_full, ef_rd, ef_empty;
  logic [15:0] ef_din, ef_dout;

  // ADC sample of the current slice, captured with the shared sample enable
  always_ff @(posedge clk) begin
    if (rst)            adc_q <= '0;
    else if (sample_en) adc_q <= adc_data;
  end

  cic_filter #(.IN_BITS(10), .ORDER(2), .DIFF_DELAY(4)) u_cic (
    .clk, .rst, .in_valid(slice_en), .din(adc_q), .dout(cic_y));

  fir_filter #(.IN_BITS(14)) u_fir (
    .clk, .rst, .in_valid(slice_en), .din(cic_y), .dout(fir_y));

  csp_recorder #(.DBITS(14), .REC_LEN(REC_LEN)) u_csp (
    .clk, .rst, .in_valid(slice_en), .din(fir_y), .time_now, .arm(|rec_start),
    .arm_len, .slope_thr, .fifo_wr(ef_wr), .fifo_data(ef_din), .fifo_full(ef_full),
    .armed(), .trigger(energy_trig), .ovf());

  sync_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_en_fifo (
    .clk, .rst, .wr(ef_wr), .din(ef_din), .full(ef_full),
    .rd(ef_rd), .dout(ef_dout), .empty(ef_empty), .count());

  usb_bridge u_usb (
    .clk, .rst, .pos_empty(pf_empty), .pos_dout(pf_dout), .pos_rd(pf_rd),
    .en_empty(ef_empty), .en_dout(ef_dout), .en_rd(ef_rd),
    .usb_valid, .usb_data, .usb_src, .usb_ready);
endmodule
