// tb_xy_coincidence: random local-trigger vectors; coincidence must be set
// exactly when both sides have at least one trigger.
//
// The rule is the paper's definition of a coincidence: at least one strip
// fired in X and one in Y in the same sample. Combinational, checked 1 time
// unit after each change.
module tb_xy_coincidence;
  logic [15:0] trig_x, trig_y;
  logic coinc;
  int checks = 0, failures = 0, n_one_side = 0;

  xy_coincidence #(.N_X(16), .N_Y(16)) dut (.*);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic bit ex = 1'b0;
      automatic int unsigned rx = $urandom_range(0, 2);
      automatic int unsigned ry = $urandom_range(0, 2);
      automatic int unsigned bx = $urandom_range(0, 15);
      automatic logic [15:0] vy = 16'($urandom) | 16'd1;
      trig_x = (rx == 0) ? 16'd0 : (16'd1 << bx);
      trig_y = (ry == 0) ? 16'd0 : vy;
      #1;
      for (int i = 0; i < 16; i++) if (trig_x[i]) for (int j = 0; j < 16; j++) if (trig_y[j]) ex = 1;
      if ((trig_x == 0) != (trig_y == 0)) n_one_side++;
      checks++;
      if (coinc != ex) begin failures++; $display("FAIL %h %h", trig_x, trig_y); end
    end
    checks++;
    if (n_one_side == 0) failures++;
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
