// tb_asic_interface: one group interface driven through its two serial lines
// in the ASIC serializer's timing. Sparse random hit patterns and a random X/Y
// coincidence flag are applied; a reference model of the recording rule
// (start on hit with coincidence, continue until gap_preset empty slices)
// gives the expected (time tag, position) stream, which is compared in order
// with data_available / acknowledge (random acknowledge).
//
// The recording rule checked is the paper's; the coincidence flag is random
// here because this test has a single group. Watchdog: 1 ms.
module tb_asic_interface;
  import mimac_pkg::*;
  localparam int G = 3;
  logic clk = 0, rst = 1, sample_en = 0, run = 1, ser_lsb = 0, ser_msb = 0, coinc = 0;
  time_tag_t time_now = 0;
  logic [7:0] gap_preset = 8'(G);
  logic trig, slice_en, rec_start, rec_end, ovf, data_available, acknowledge = 0;
  time_tag_t time_tag;
  pos_t position;
  int checks = 0, failures = 0, n_start = 0, n_end = 0, n_nocoinc = 0;
  logic [15:0] sentq [$];
  logic [15:0] cur = 0;
  int k = 0, cyc = 0;
  typedef struct { time_tag_t t; pos_t p; } exp_t;
  exp_t expq [$];
  bit m_rec = 0;
  int m_gap = 0;

  asic_interface #(.DEPTH(1024), .SIDE_Y(1), .ASIC_ID(1), .GROUP_ID(2)) dut (.*);
  always #1.25ns clk = ~clk;

  // sample enable and serial lines, as the ASIC produces them
  always @(posedge clk) begin
    cyc++;
    if (sample_en) begin
      cur = (cyc < 20 || $urandom % 3 != 0) ? 16'd0 : 16'($urandom) & 16'($urandom) & 16'($urandom);
      sentq.push_back(cur);
      k = 0;
    end else k++;
    #0.1ns;
    ser_lsb = cur[k % 8];
    ser_msb = cur[8 + k % 8];
  end
  always @(negedge clk) sample_en <= (cyc % 8) == 7;

  always @(posedge clk) if (!rst && slice_en) begin
    logic [15:0] w;
    // the word that has just been deserialized is the one loaded a slice before the last load
    w = (sentq.size() >= 2) ? sentq[sentq.size() - 2] : 16'd0;
    if (w != dut.word) begin failures++; $display("FAIL word sync"); end
    if (!m_rec) begin
      if (w != 0 && coinc) begin m_rec = 1; m_gap = 0; end
      else if (w != 0) n_nocoinc++;
    end else if (w == 0) begin
      m_gap++;
      if (m_gap >= G) m_rec = 0;
    end else m_gap = 0;
    if (m_rec) for (int c = 0; c < 16; c++)
      if (w[c]) expq.push_back('{t: time_now, p: encode_pos(1'b1, 2'd1, 2'd2, 4'(c))});
    if (rec_start) n_start++;
    if (rec_end) n_end++;
    time_now <= time_now + 1'b1;
  end
  // coinc for the coming slice cycle: set just before it
  always @(negedge clk) if (word_due()) coinc <= ($urandom % 10) < 3;
  function automatic bit word_due();
    return sample_en;  // slice_en follows sample_en by one cycle
  endfunction

  always @(negedge clk) acknowledge <= ($urandom % 4) != 0;
  always @(posedge clk) if (!rst && data_available && acknowledge) begin
    exp_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL extra output"); end
    else begin
      e = expq.pop_front();
      if (e.t != time_tag || e.p != position) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d/%h exp %0d/%h", time_tag, position, e.t, e.p);
      end
    end
  end

  initial begin
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (8 * 4000) @(negedge clk);
    repeat (200) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    checks++;
    if (n_start < 20 || n_end < 20 || n_nocoinc < 20) begin
      failures++; $display("FAIL coverage starts=%0d ends=%0d nocoinc=%0d", n_start, n_end, n_nocoinc);
    end
    $display("starts=%0d ends=%0d hits_without_coincidence=%0d", n_start, n_end, n_nocoinc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
