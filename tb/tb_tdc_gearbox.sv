// tb_tdc_gearbox: drives random 4-bit words at 625 MHz and checks that every
// 312.5 MHz vector is {word m-1, word m-2} of the words driven so far (bit 0 the
// earliest sample), i.e. two consecutive samples joined without gaps or overlap.
module tb_tdc_gearbox;
  logic clk_int = 0, clk_div = 0;
  logic [3:0] q = '0;
  logic [7:0] vec;
  int checks = 0, failures = 0;
  int m = 0;
  logic [3:0] hist [0:4095];

  tdc_gearbox dut (.clk_int(clk_int), .clk_div(clk_div), .q(q), .vec(vec));

  // clk_div rises together with every other clk_int rise
  initial forever begin
    #0.8 clk_int = 1; if (m % 2 == 0) clk_div = 1;
    #0.8 clk_int = 0; if (m % 2 == 1) clk_div = 0;
  end

  always @(posedge clk_int) begin
    logic [3:0] w;
    w = 4'($urandom);
    hist[m % 4096] = w;
    q <= w;
    m <= m + 1;
  end

  // at a clk_div edge driven in cycle index m, q shows word m-1, so the
  // vector captured holds words m-1 (late half) and m-2 (early half)
  int pend_m = -1;
  always @(posedge clk_div) pend_m = m;
  always @(negedge clk_div) begin
    if (pend_m >= 3) begin
      logic [7:0] exp;
      exp = {hist[(pend_m-1) % 4096], hist[(pend_m-2) % 4096]};
      checks++;
      if (vec !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch m=%0d vec=%h exp=%h", pend_m, vec, exp);
      end
    end
  end

  initial begin
    #2000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
