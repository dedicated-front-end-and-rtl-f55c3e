// tb_event_gen_check: stimulus and checker shared by the FPGA and board
// testbenches.
//
// Stimulus, one decision per 20 ns slice (sample_en from the design):
//  * mode 1: recoil-like tracks, a diagonal run of X and Y strips lasting 5-30
//    slices with single empty slices inside, crossing ASIC boundaries, separated
//    by quiet periods longer than the gap preset in which X-only noise hits
//    (no coincidence) appear; a grid pulse follows each track start by 8 slices;
//  * mode 2: one X and one Y strip fired in every slice (fills the buffers);
//  * mode 0: nothing.
// Checker: a reference model of the recording rule per group (start on a hit
// with X/Y coincidence in the slice, stop after gap_preset empty slices),
// driven by the hits as the FPGA sees them (after channel masking, en_mask),
// gives the expected (time, position) list; the USB stream is parsed (slice
// header words and position words, energy records) and compare() checks the
// two lists as multisets (on a cycle with compare_req high, results in
// checks/failures) and counts energy records that lack REC_LEN samples.
//
// The recording rule and the coincidence definition modelled are the paper's;
// the track shapes are invented test data.
module tb_event_gen_check
  import mimac_pkg::*;
#(
  parameter int N_ASIC  = 8,
  parameter int REC_LEN = 256
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sample_en,
  input  logic        run,
  input  logic [7:0]  gap_preset,
  input  logic [1:0]  mode,
  input  logic [63:0] en_mask [N_ASIC],
  output logic [63:0] hits_drv [N_ASIC],
  output logic [9:0]  adc_data,
  input  logic        usb_valid,
  input  logic        usb_ready,
  input  logic [15:0] usb_data,
  input  logic        usb_src,
  input  logic        compare_req
);
  localparam int NG = N_ASIC * 4;
  typedef struct { time_tag_t t; pos_t p; } tp_t;

  int ph = 0, slice_no = 0;
  logic [63:0] hist [$][N_ASIC];
  logic [63:0] last_loaded [N_ASIC];
  logic [63:0] prev_loaded [N_ASIC];
  bit se_q = 0;
  initial for (int a = 0; a < N_ASIC; a++) begin
    last_loaded[a] = '0; prev_loaded[a] = '0; hits_drv[a] = '0;
  end
  initial adc_data = 10'd100;
  time_tag_t tb_time = 0;
  bit m_rec [NG];
  int m_gap [NG];
  typedef logic [28:0] key_t;   // {time tag, position}
  key_t exp_keys [$], got_keys [$];
  time_tag_t cur_hdr = 0;
  int n_start = 0, n_close = 0, n_nocoinc = 0, n_masked = 0, n_erec = 0, n_eshort = 0;
  int e_cnt = -1, n_backpressure = 0, n_events = 0, n_pos_words = 0, n_hdr_words = 0;

  // ---------------- stimulus ----------------
  int ev_left = 0, quiet = 30, ev_i = 0, x0 = 0, y0 = 0, pulse_t = -1000;
  bit last_empty = 0;

  function automatic void set_strip(ref logic [63:0] h [N_ASIC], input int side, input int strip);
    automatic int a = side * (N_ASIC / 2) + (strip / 64) % (N_ASIC / 2);
    h[a][strip % 64] = 1'b1;
  endfunction

  always @(negedge clk) begin
    if (ph == 3) begin
      logic [63:0] h [N_ASIC];
      for (int a = 0; a < N_ASIC; a++) h[a] = '0;
      if (mode == 2) begin
        set_strip(h, 0, 5); set_strip(h, 1, 70);
      end else if (mode == 1) begin
        if (ev_left > 0) begin
          if (!last_empty && ev_i > 0 && ev_left > 1 && $urandom % 8 == 0) last_empty = 1;
          else begin
            last_empty = 0;
            set_strip(h, 0, x0 + ev_i / 2);
            if ($urandom % 3 == 0) set_strip(h, 0, x0 + ev_i / 2 + 1);
            set_strip(h, 1, y0 + ev_i / 3);
          end
          ev_i++; ev_left--;
          if (ev_left == 0) quiet = int'(gap_preset) + 5 + $urandom % 40;
        end else if (quiet > 0) begin
          quiet--;
          if ($urandom % 10 == 0) set_strip(h, 0, $urandom % 256);   // X-only noise
        end else begin
          ev_left = 5 + $urandom % 26; ev_i = 0; last_empty = 0;
          x0 = $urandom % 256; y0 = $urandom % 256;
          pulse_t = slice_no + 8; n_events++;
          set_strip(h, 0, x0); set_strip(h, 1, y0);
          ev_i++; ev_left--;
        end
      end
      hits_drv <= h;
    end
  end

  // grid CSP signal: baseline with noise, pulse rising 10 samples then decaying
  always @(negedge clk) if (ph == 2) begin
    automatic int t = slice_no - pulse_t;
    automatic int v = 100 + $urandom % 4;
    if (t >= 0 && t < 10) v += 30 * t;
    else if (t >= 10 && t < 110) v += 300 - 3 * (t - 10);
    adc_data <= 10'(v);
  end

  // ---------------- model ----------------
  always @(posedge clk) begin
    ph <= sample_en ? 0 : ph + 1;
    se_q <= sample_en;
    if (sample_en) begin
      slice_no++;
      prev_loaded = last_loaded;
      for (int a = 0; a < N_ASIC; a++) begin
        last_loaded[a] = hits_drv[a] & en_mask[a];
        if ((hits_drv[a] & ~en_mask[a]) != 0 && !rst) n_masked++;
      end
    end
    if (rst || !run) begin
      tb_time <= '0;
      for (int g = 0; g < NG; g++) begin m_rec[g] = 0; m_gap[g] = 0; end
    end else if (se_q) begin
      // slice cycle: the word of each group is the slice loaded a slice ago
      automatic bit any_x = 0, any_y = 0, coinc;
      for (int a = 0; a < N_ASIC; a++)
        if (prev_loaded[a] != 0) begin if (a < N_ASIC / 2) any_x = 1; else any_y = 1; end
      coinc = any_x && any_y;
      for (int a = 0; a < N_ASIC; a++) for (int g = 0; g < 4; g++) begin
        automatic int k = a * 4 + g;
        automatic logic [15:0] w = prev_loaded[a][g*16 +: 16];
        if (!m_rec[k]) begin
          if (w != 0 && coinc) begin m_rec[k] = 1; m_gap[k] = 0; n_start++; end
          else if (w != 0) n_nocoinc++;
        end else if (w == 0) begin
          m_gap[k]++;
          if (m_gap[k] >= ((gap_preset == 0) ? 1 : int'(gap_preset))) begin m_rec[k] = 0; n_close++; end
        end else m_gap[k] = 0;
        if (m_rec[k]) for (int c = 0; c < 16; c++) if (w[c])
          exp_keys.push_back({tb_time, encode_pos(a >= N_ASIC / 2, 2'(a % (N_ASIC / 2)), 2'(g), 4'(c))});
      end
      tb_time <= tb_time + 1'b1;
    end
  end

  // ---------------- USB stream parser ----------------
  always @(posedge clk) if (!rst) begin
    if (usb_valid && !usb_ready) n_backpressure++;
    if (usb_valid && usb_ready) begin
      if (!usb_src) begin
        if (usb_data[15]) begin cur_hdr = usb_data[12:0]; n_hdr_words++; end
        else begin got_keys.push_back({cur_hdr, usb_data}); n_pos_words++; end
      end else begin
        if (usb_data[15]) begin
          if (e_cnt >= 0 && e_cnt != REC_LEN) n_eshort++;
          e_cnt = 0; n_erec++;
        end else e_cnt++;
      end
    end
  end

  // compare expected and received positions as multisets, then clear both
  int checks = 0, failures = 0;   // results of the comparisons so far
  int bad, found;
  key_t gk;
  always @(posedge clk) if (compare_req) begin
    bad = 0;
    checks++;
    if (exp_keys.size() != got_keys.size()) begin
      failures++;
      $display("FAIL positions: expected %0d received %0d", exp_keys.size(), got_keys.size());
    end
    // remove every received position from the expected list
    while (got_keys.size() > 0) begin
      gk = got_keys.pop_front();
      found = -1;
      for (int jj = 0; jj < exp_keys.size(); jj++) if (found < 0 && exp_keys[jj] == gk) found = jj;
      checks++;
      if (found < 0) begin
        failures++; bad++;
        if (bad < 10) $display("FAIL unexpected position t=%0d p=%h", gk[28:16], gk[15:0]);
      end else exp_keys.delete(found);
    end
    while (exp_keys.size() > 0) begin
      gk = exp_keys.pop_front();
      failures++; bad++;
      if (bad < 20) $display("FAIL missing position t=%0d p=%h", gk[28:16], gk[15:0]);
    end
  end
endmodule
