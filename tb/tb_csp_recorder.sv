// tb_csp_recorder: a noisy flat signal with a few slow-rising pulses.
// Checks that (1) a pulse while not armed records nothing, (2) after an arm
// pulse the first sample whose rise over 4 samples exceeds the threshold
// triggers, (3) the FIFO receives the header with the trigger-slice time and
// exactly REC_LEN samples starting PRE-1 samples before the trigger sample,
// (4) the arming window expires, and (5) a FIFO stall is absorbed.
//
// Arming by the position trigger and the slope condition are the paper's;
// window lengths, PRE and the record format are this design's.
module tb_csp_recorder;
  import mimac_pkg::*;
  localparam int PRE = 16, REC_LEN = 64, D = 4;
  logic clk = 0, rst = 1, in_valid = 0, arm = 0, fifo_wr, fifo_full = 0, armed, trigger, ovf;
  logic [13:0] din = 0, slope_thr = 14'd200;
  time_tag_t time_now = 0;
  logic [15:0] arm_len = 16'd100, fifo_data;
  int xs [$];
  logic [15:0] got [$];
  int checks = 0, failures = 0, ntrig = 0;

  csp_recorder #(.DBITS(14), .PRE(PRE), .REC_LEN(REC_LEN), .SLOPE_DIST(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (fifo_wr && !rst) got.push_back(fifo_data);
  always @(posedge clk) if (trigger) ntrig++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one sample every 8 clocks; pulse shape: rises 100 per sample for 20 samples
  function automatic int sig(int n);
    int v = 1000 + ($urandom % 20);
    foreach (pstart[i]) if (n >= pstart[i] && n < pstart[i] + 60) v += 100 * ((n - pstart[i]) < 20 ? (n - pstart[i]) : 20);
    return v;
  endfunction
  int pstart [3] = '{100, 400, 900};

  initial begin
    int exp_trig_n [$];
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 1200; n++) begin
      automatic int v = sig(n);
      din = 14'(v); xs.push_back(v);
      arm = (n == 350) || (n == 600);          // first pulse unarmed, third arrives after window
      fifo_full = (n >= 420 && n < 424);
      in_valid = 1;
      #1;
      if (trigger) exp_trig_n.push_back(n);
      @(negedge clk);
      in_valid = 0; arm = 0;
      repeat (7) begin
        fifo_full = (n >= 420 && n < 424) && ($urandom % 2 == 0);
        @(negedge clk);
      end
      time_now++;
    end
    chk(exp_trig_n.size() == 1, $sformatf("one trigger, got %0d", exp_trig_n.size()));
    if (exp_trig_n.size() == 1) begin
      automatic int tn = exp_trig_n[0];
      chk(tn > 400 && tn < 410, "trigger on second pulse rise");
      chk(xs[tn] - xs[tn - D] > 200 && !(xs[tn-1] - xs[tn-1-D] > 200), "first slope sample");
      chk(got.size() == REC_LEN + 1, $sformatf("record length %0d", got.size()));
      chk(got[0] == {3'b100, 13'(tn)}, "header time");
      for (int k = 1; k < got.size(); k++)
        chk(int'(got[k]) == xs[tn - (PRE - 1) + k - 1], $sformatf("sample %0d got %0d exp %0d n=%0d", k, got[k], xs[tn - (PRE - 1) + k - 1], tn));
    end
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
