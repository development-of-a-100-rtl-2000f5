// tb_tdc_line_align: feeds a random sample stream as 8-bit vectors and checks,
// for every shift 0..7, that each output sample equals the input sample
// 8 + shift positions earlier (one vector of register latency plus the shift).
module tb_tdc_line_align;
  logic clk = 0;
  logic [2:0] shift = '0;
  logic [7:0] vin = '0, vout;
  int checks = 0, failures = 0;
  int n = 0;                       // vectors driven
  logic stream [0:65535];          // sample history, index = 8*vector + bit

  tdc_line_align dut (.clk(clk), .shift(shift), .vin(vin), .vout(vout));

  always #1.6 clk = ~clk;

  task automatic drive_and_check(int cycles);
    repeat (cycles) begin
      @(negedge clk);
      // vout now holds the vector registered at the last edge (input n-1)
      if (n >= 3) begin
        for (int b = 0; b < 8; b++) begin
          int idx;
          idx = 8 * (n - 1) + b - int'(shift);
          checks++;
          if (vout[b] !== stream[idx]) begin
            failures++;
            if (failures < 5) $display("shift=%0d n=%0d bit %0d got %b exp %b", shift, n, b, vout[b], stream[idx]);
          end
        end
      end
      vin = 8'($urandom);
      for (int b = 0; b < 8; b++) stream[8 * n + b] = vin[b];
      n++;
    end
  endtask

  initial begin
    for (int s = 0; s < 8; s++) begin
      @(negedge clk);
      shift = 3'(s);
      // skip checks for two vectors while the window refills under the new shift
      begin
        int n0; n0 = n;
        repeat (2) begin
          @(negedge clk); vin = 8'($urandom);
          for (int b = 0; b < 8; b++) stream[8 * n + b] = vin[b];
          n++;
        end
      end
      drive_and_check(50);
    end
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
