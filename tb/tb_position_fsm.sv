// tb_position_fsm: drives one hit word per slice (slice_en every 8 cycles)
// with a random coincidence and checks every memory write against a
// reference model of the recording rule: a record starts on hit & coincidence
// with the time tag, writes the previous slice's pattern every slice, and
// stops after gap_preset empty slices. Uses an 8-word memory (ADDR_BITS=3)
// and a slow reader so that the full-memory overflow also occurs.
//
// Start on coincidence and stop after a preset number of empty slices are the
// paper's; the word layout and the overflow behaviour are this design's.
module tb_position_fsm;
  import mimac_pkg::*;
  localparam int AB = 3;
  logic clk = 0, rst = 1, slice_en = 0, run = 1, coinc = 0;
  logic [15:0] word = 0;
  time_tag_t time_now = 0;
  logic [7:0] gap_preset = 3;
  logic [AB:0] rd_ptr = 0;
  logic trig, we, rec_start, rec_end, ovf;
  logic [AB-1:0] waddr;
  logic [17:0] wdata;
  logic [AB:0] wr_ptr;
  int checks = 0, failures = 0, n_start = 0, n_end = 0, n_ovf = 0;

  position_fsm #(.ADDR_BITS(AB)) dut (.*);
  always #5 clk = ~clk;

  // reference model
  bit          m_rec = 0;
  logic [15:0] m_dly = 0;
  int          m_gap = 0;
  int          m_wp = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s t=%0d", what, time_now); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int s = 0; s < 3000; s++) begin
      bit exp_we, exp_ovf;
      logic [17:0] exp_d;
      int used;
      // stimulus for this slice
      word  = ($urandom % 3 == 0) ? 16'(1 << ($urandom % 16)) : 16'd0;
      if (s % 400 > 300) word = 16'h0101;           // long record to fill the memory
      coinc = ($urandom % 2) == 0;
      if (s % 500 == 0) gap_preset = 8'(1 + $urandom % 4);
      slice_en = 1;
      used = (m_wp - int'(rd_ptr)) & 15;
      exp_we = 0; exp_ovf = 0; exp_d = 0;
      if (!m_rec) begin
        if (word != 0 && coinc) begin
          if (used == 8) exp_ovf = 1;
          else begin exp_we = 1; exp_d = {1'b1, 4'b0, time_now}; m_rec = 1; m_dly = word; m_gap = 0; end
        end
      end else begin
        if (used == 8) begin exp_ovf = 1; m_rec = 0; end
        else begin
          exp_we = 1; exp_d = {2'b0, m_dly};
          m_dly = word;
          if (word != 0) m_gap = 0;
          else begin m_gap++; if (m_gap >= gap_preset) m_rec = 0; end
        end
      end
      #1;
      chk(trig == (word != 0), "trig");
      chk(we == exp_we, "we");
      chk(ovf == exp_ovf, "ovf");
      if (we && exp_we) begin
        chk(wdata == exp_d, $sformatf("wdata %h exp %h", wdata, exp_d));
        chk(waddr == AB'(m_wp), "waddr");
      end
      if (rec_start) n_start++;
      if (rec_end) n_end++;
      if (ovf) n_ovf++;
      if (exp_we) m_wp++;
      @(negedge clk);
      slice_en = 0;
      time_now++;
      // reader takes one word every other slice
      if (s % 2 == 0 && rd_ptr != wr_ptr) rd_ptr++;
      repeat (7) @(negedge clk);
    end
    chk(n_start > 50, "records started");
    chk(n_end > 50, "records closed");
    chk(n_ovf > 0, "overflow seen");
    $display("starts=%0d ends=%0d ovf=%0d", n_start, n_end, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
