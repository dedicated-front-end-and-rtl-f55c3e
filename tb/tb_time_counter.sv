// tb_time_counter: counts slices while run is high and checks the value every
// cycle against a model: through the wrap at 8192, the clear when run drops,
// and then random run periods with random slice strobes.
//
// The 13-bit width and the run input are the paper's; clear-on-stop is this
// design's.
module tb_time_counter;
  logic clk = 0, rst = 1, slice_en = 0, run = 0;
  logic [12:0] time_now;
  int checks = 0, failures = 0;
  int unsigned exp_t = 0;

  time_counter #(.WIDTH(13)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s got %0d exp %0d", what, time_now, exp_t); end
  endtask

  initial begin
    @(negedge clk); rst = 0; run = 1;
    // long run through the wrap, slice every other cycle, checked every cycle
    for (int n = 0; n < 9000 * 2; n++) begin
      slice_en = (n % 2 == 0);
      @(negedge clk);
      if (slice_en) exp_t = (exp_t + 1) % 8192;
      chk(time_now == 13'(exp_t), "count");
    end
    chk(exp_t != 0 && time_now == 13'(exp_t), "after wrap");
    run = 0; @(negedge clk); exp_t = 0;
    chk(time_now == 0, "clear on run low");
    slice_en = 1; @(negedge clk);
    chk(time_now == 0, "hold while stopped");
    // random run periods and slice strobes against the model
    for (int n = 0; n < 20000; n++) begin
      run      = ($urandom % 500 != 0) ? (run | ($urandom % 20 == 0)) : 1'b0;
      slice_en = ($urandom % 8 == 0);
      @(negedge clk);
      if (!run) exp_t = 0;
      else if (slice_en) exp_t = (exp_t + 1) % 8192;
      chk(time_now == 13'(exp_t), "random run/slice");
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
