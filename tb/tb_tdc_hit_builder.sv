// tb_tdc_hit_builder: drives per-line edge strobes directly.
// Random pulses: every line rises within 0..1 vectors of the others and falls
// 0..(random) vectors later; the expected leading time is the sum of the four
// rising times (400 ps units -> 100 ps units) and ToT the difference of the
// sums, computed here in plain integers modulo 2^(CW+5). A small CW makes the
// coarse counter wrap often. Also checked: a line that never rises (err_miss
// after the edge window), a pulse with no falling edge (timeout), pulses that
// rise and fall inside one vector, and rising edges during the 10-vector veto
// (vetoed, no hit). The number of cycles from the last falling strobe to
// hit_valid is checked (2 cycles).
module tb_tdc_hit_builder;
  localparam int CW = 6;
  localparam int TSW = CW + 3;
  localparam int MAXT = 40;
  logic clk = 0, rst = 1;
  logic [3:0] rise = '0, fall = '0, far = '0;
  logic [TSW-1:0] rise_ts [4];
  logic [TSW-1:0] fall_ts [4];
  logic hit_valid, err_miss, vetoed;
  logic [CW+4:0] hit_time;
  logic [15:0] hit_tot;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_hits = 0, n_miss = 0, n_veto = 0;

  tdc_hit_builder #(.CW(CW), .VETO_CYC(10), .EDGE_WIN(3), .MAX_TOT_CYC(MAXT), .TOT_W(16)) dut (
    .clk(clk), .rst(rst), .rise(rise), .rise_ts(rise_ts), .fall(fall), .fall_ts(fall_ts),
    .fall_after_rise(far), .hit_valid(hit_valid), .hit_time(hit_time), .hit_tot(hit_tot),
    .err_miss(err_miss), .vetoed(vetoed));

  always #1.6 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (hit_valid) n_hits++;
    if (err_miss) n_miss++;
    if (vetoed) n_veto++;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  function automatic int mod(int a, int m); return ((a % m) + m) % m; endfunction

  // One pulse. rc[i]/fc[i]: vector (cycle offset) of the rising/falling edge
  // of line i; rp/fp: positions. base: coarse value at offset 0.
  task automatic pulse(int base, int rc[4], int rp[4], int fc[4], int fp[4], bit expect_hit);
    int last, sr, sf, t0;
    int got_hits, got_miss;
    last = 0;
    for (int i = 0; i < 4; i++) if (fc[i] > last) last = fc[i];
    for (int i = 0; i < 4; i++) if (rc[i] > last) last = rc[i];
    sr = 0; sf = 0;
    for (int i = 0; i < 4; i++) begin
      sr += (base + rc[i]) * 8 + rp[i];
      sf += (base + fc[i]) * 8 + fp[i];
    end
    got_hits = n_hits; got_miss = n_miss;
    for (int c = 0; c <= last; c++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        rise[i] = (rc[i] == c);
        fall[i] = (fc[i] == c);
        far[i]  = (rc[i] == c) && (fc[i] == c) && (fp[i] > rp[i]);
        rise_ts[i] = TSW'((base + c) * 8 + rp[i]);
        fall_ts[i] = TSW'((base + c) * 8 + fp[i]);
      end
    end
    @(negedge clk); rise = '0; fall = '0; far = '0;
    t0 = cyc;
    if (expect_hit) begin
      // the hit appears at the second clock edge after the last strobe
      // (the first edge has passed before the strobes were cleared)
      chk(!hit_valid, "hit too early");
      @(posedge clk); #0.1;
      chk(hit_valid, "hit latency 2 cycles");
      chk(hit_time == (CW+5)'(mod(sr, 1 << (CW + 5))), $sformatf("hit_time %0d exp %0d", hit_time, mod(sr, 1 << (CW+5))));
      chk(hit_tot == 16'(sf - sr), $sformatf("tot %0d exp %0d", hit_tot, sf - sr));
    end
    repeat (14) @(negedge clk);
    if (!expect_hit) chk(n_hits == got_hits && n_miss == got_miss + 1, "incomplete pulse dropped");
  endtask

  initial begin
    int rc[4], rp[4], fc[4], fp[4];
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);
    // random complete pulses, including single-vector pulses
    for (int p = 0; p < 300; p++) begin
      int len;
      len = ($urandom % 4 == 0) ? 0 : 1 + ($urandom % 20);
      for (int i = 0; i < 4; i++) begin
        rc[i] = $urandom % 2;
        rp[i] = $urandom % 8;
        fc[i] = rc[i] + len + (len == 0 ? 0 : $urandom % 2);
        fp[i] = (fc[i] == rc[i]) ? rp[i] + 1 + ($urandom % (8 - rp[i] > 1 ? 7 - rp[i] : 1)) : $urandom % 8;
        if (fp[i] > 7) begin fp[i] = 7; if (rp[i] == 7) rp[i] = 6; end
      end
      pulse(cyc + 1, rc, rp, fc, fp, 1);
    end
    // a line that never rises: err_miss
    for (int i = 0; i < 4; i++) begin rc[i] = (i == 2) ? 99 : 0; rp[i] = i; fc[i] = 3; fp[i] = 2; end
    rc[2] = -1; fc[2] = -1;   // line 2 sees nothing
    pulse(cyc + 1, rc, rp, fc, fp, 0);
    // no falling edge within MAX_TOT_CYC: timeout
    for (int i = 0; i < 4; i++) begin rc[i] = 0; rp[i] = i; fc[i] = MAXT + 5; fp[i] = 1; end
    pulse(cyc + 1, rc, rp, fc, fp, 0);
    // veto: a second pulse 4 vectors after a hit is ignored
    begin
      int h0, v0;
      for (int i = 0; i < 4; i++) begin rc[i] = 0; rp[i] = i; fc[i] = 2; fp[i] = i; end
      h0 = n_hits; v0 = n_veto;
      for (int c = 0; c <= 2; c++) begin
        @(negedge clk);
        rise = (c == 0) ? 4'hf : 4'h0; fall = (c == 2) ? 4'hf : 4'h0;
        for (int i = 0; i < 4; i++) begin rise_ts[i] = TSW'(c*8+i); fall_ts[i] = TSW'(c*8+i); end
      end
      @(negedge clk); rise = 0; fall = 0;
      repeat (4) @(negedge clk);
      rise = 4'hf; @(negedge clk); rise = 0;
      repeat (3) @(negedge clk); fall = 4'hf; @(negedge clk); fall = 0;
      repeat (20) @(negedge clk);
      chk(n_hits == h0 + 1, "only the first of two close pulses is a hit");
      chk(n_veto > v0, "veto counted");
    end
    chk(n_hits >= 300, "hits seen");
    $display("hits=%0d miss=%0d vetoed=%0d", n_hits, n_miss, n_veto);
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
