// tb_tdc_edge_detect: random level sequences (runs of 1..20 samples) are cut
// into vectors; for every vector the testbench finds, from the sample stream,
// the first rising and the last falling transition and checks the strobes and
// the {coarse, position} timestamps one cycle later.
module tb_tdc_edge_detect;
  localparam int CW = 16;
  logic clk = 0;
  logic [7:0] vec = '0;
  logic [CW-1:0] coarse = '0;
  logic rise, fall, far;
  logic [CW+2:0] rise_ts, fall_ts;
  int checks = 0, failures = 0;
  logic stream [0:65535];
  int n = 0;
  int nrise = 0, nfall = 0, nboth = 0;

  tdc_edge_detect #(.VEC_W(8), .CW(CW)) dut (
    .clk(clk), .vec(vec), .coarse(coarse), .rise(rise), .rise_ts(rise_ts),
    .fall(fall), .fall_ts(fall_ts), .fall_after_rise(far));

  always #1.6 clk = ~clk;

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d: %s", n, msg);
    end
  endtask

  initial begin
    int k, lvl, run;
    // build the sample stream
    k = 0; lvl = 0;
    stream[0] = 0;
    while (k < 8 * 3000) begin
      run = 1 + ($urandom % 20);
      for (int r = 0; r < run && k < 8 * 3000; r++) begin stream[k] = lvl[0]; k++; end
      lvl = 1 - lvl;
    end
    for (n = 0; n < 3000; n++) begin
      @(negedge clk);
      // outputs now describe vector n-1
      if (n >= 2) begin
        int v, er, ef;
        bit hr, hf;
        v = n - 1; hr = 0; hf = 0; er = 0; ef = 0;
        for (int b = 0; b < 8; b++) begin
          int s; s = 8 * v + b;
          if (!hr && !stream[s-1] && stream[s]) begin hr = 1; er = b; end
          if (stream[s-1] && !stream[s]) begin hf = 1; ef = b; end
        end
        chk(rise == hr, "rise strobe");
        chk(fall == hf, "fall strobe");
        if (hr) begin chk(rise_ts == {CW'(v), 3'(er)}, "rise_ts"); nrise++; end
        if (hf) begin chk(fall_ts == {CW'(v), 3'(ef)}, "fall_ts"); nfall++; end
        chk(far == (hr && hf && ef > er), "fall_after_rise");
        if (hr && hf && ef > er) nboth++;
      end
      for (int b = 0; b < 8; b++) vec[b] = stream[8 * n + b];
      coarse = CW'(n);
    end
    chk(nrise > 100 && nfall > 100 && nboth > 10, "coverage of edge kinds");
    $display("rises=%0d falls=%0d short pulses=%0d", nrise, nfall, nboth);
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
