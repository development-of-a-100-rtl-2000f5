// tb_cal_ctrl: sends calibration commands and checks that the settings are
// latched, that a phase move of n steps gives exactly n ps_en pulses in the
// requested direction, each only after the previous ps_done (the MMCM model
// answers after a random 2..9 cycles), that cmd_ready is low until the last
// step is done, and that the phase register tracks the accumulated steps.
module tb_cal_ctrl;
  logic clk = 0, rst = 1;
  logic cmd_valid = 0, cmd_ready, c_async = 0, c_xp = 0, c_pen = 0, c_up = 0;
  logic [9:0] c_steps = '0;
  logic sel_async, xpoint_cal, pulser_en, ps_en, ps_incdec, ps_done = 0;
  logic signed [15:0] phase;
  int checks = 0, failures = 0;
  int model_phase = 0, pending = -1, n_en = 0;

  cal_ctrl dut (.clk(clk), .rst(rst), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready),
    .cmd_sel_async(c_async), .cmd_xpoint_cal(c_xp), .cmd_pulser_en(c_pen), .cmd_up(c_up),
    .cmd_steps(c_steps), .sel_async(sel_async), .xpoint_cal(xpoint_cal), .pulser_en(pulser_en),
    .ps_en(ps_en), .ps_incdec(ps_incdec), .ps_done(ps_done), .phase(phase));

  always #4 clk = ~clk;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    ps_done <= 0;
    if (pending == 0) begin ps_done <= 1; pending = -1; end
    else if (pending > 0) pending--;
    if (!rst && ps_en) begin
      chk(pending == -1, "ps_en only after ps_done");
      pending = 2 + $urandom % 8;
      model_phase += ps_incdec ? 1 : -1;
      n_en++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    chk(!sel_async && !xpoint_cal && !pulser_en && phase == 0, "reset state");
    for (int k = 0; k < 12; k++) begin
      int n0, steps, ph0;
      bit up;
      steps = $urandom % 40; up = $urandom % 2;
      c_async = $urandom % 2; c_xp = $urandom % 2; c_pen = $urandom % 2; c_up = up; c_steps = 10'(steps);
      wait (cmd_ready); @(negedge clk);
      n0 = n_en; ph0 = model_phase;
      cmd_valid = 1; @(negedge clk); cmd_valid = 0;
      chk(sel_async == c_async && xpoint_cal == c_xp && pulser_en == c_pen, "settings latched");
      if (steps > 0) chk(!cmd_ready, "busy while stepping");
      wait (cmd_ready); @(negedge clk);
      chk(n_en - n0 == steps, $sformatf("%0d steps issued, %0d asked", n_en - n0, steps));
      chk(model_phase - ph0 == (up ? steps : -steps), "direction");
      chk(int'(phase) == model_phase, $sformatf("phase %0d model %0d", phase, model_phase));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
