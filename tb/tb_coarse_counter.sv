// tb_coarse_counter: checks that the counter advances by one per clock, and
// that a time-sync level raised asynchronously clears it exactly three clock
// edges after the first edge that sees it, then counts on; a held sync level
// does not clear it again.
module tb_coarse_counter;
  logic clk = 0, rst = 1, sync_async = 0;
  logic [31:0] coarse;
  int checks = 0, failures = 0;

  coarse_counter #(.CW(32)) dut (.clk(clk), .rst(rst), .sync_async(sync_async), .coarse(coarse));

  always #1.6 clk = ~clk;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s (coarse=%0d)", msg, coarse); end
  endtask

  initial begin
    logic [31:0] prev;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    prev = coarse;
    repeat (50) begin @(negedge clk); chk(coarse == prev + 1, "increment"); prev = coarse; end
    for (int s = 0; s < 5; s++) begin
      repeat ($urandom % 30 + 5) @(negedge clk);
      #0.7 sync_async = 1;           // asynchronous to clk
      // edges: 1 meta, 2 sync_s, 3 clear
      @(negedge clk); chk(coarse != 0, "not cleared after 1 edge");
      @(negedge clk); chk(coarse != 0, "not cleared after 2 edges");
      @(negedge clk); chk(coarse == 0, "cleared after 3 edges");
      prev = coarse;
      repeat (20) begin @(negedge clk); chk(coarse == prev + 1, "counts after sync, level held"); prev = coarse; end
      sync_async = 0;
      repeat (5) begin @(negedge clk); chk(coarse == prev + 1, "counts after sync low"); prev = coarse; end
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
