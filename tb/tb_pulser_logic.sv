// tb_pulser_logic: enables the pulser from another clock domain and checks
// that it produces pulses exactly 5 periods wide every 32 periods of the
// 31.25 MHz clock, that none appear while disabled, that the first pulse
// starts within 3..4 cycles of the enable, and that the last pulse is
// complete after disable.
module tb_pulser_logic;
  logic clk = 0, rst = 1, en = 0, pulse;
  int checks = 0, failures = 0;
  int cyc = 0;
  int last_rise = -1, hi_len = 0, npulses = 0;

  pulser_logic #(.PERIOD_CYC(32), .WIDTH_CYC(5)) dut (.clk_pls(clk), .rst(rst), .enable_async(en), .pulse(pulse));

  always #16 clk = ~clk;   // 31.25 MHz

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  logic prev = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst) begin
      if (pulse && !prev) begin
        if (last_rise >= 0) chk(cyc - last_rise == 32, $sformatf("period %0d", cyc - last_rise));
        last_rise = cyc; hi_len = 1; npulses++;
      end else if (pulse) hi_len++;
      else if (prev) chk(hi_len == 5, $sformatf("width %0d", hi_len));
      prev = pulse;
    end
  end

  initial begin
    int t_en;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (50) begin @(negedge clk); chk(!pulse, "no pulse while disabled"); end
    #5 en = 1; t_en = cyc;
    wait (pulse);
    chk(cyc - t_en >= 3 && cyc - t_en <= 4, $sformatf("first pulse after %0d cycles", cyc - t_en));
    repeat (32 * 20) @(negedge clk);
    en = 0;
    last_rise = -1;
    repeat (40) @(negedge clk);
    repeat (100) begin @(negedge clk); chk(!pulse, "no pulse after disable"); end
    chk(npulses >= 20, $sformatf("pulses %0d", npulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
