// tb_tdc_channel: end-to-end test of one channel's logic core with a model of
// its front end. The model holds a list of discriminator pulses (edge times in
// 0.1 ps units); line i sees the signal through its IDELAY (0, 13, 5, 18 taps
// of 38.8 ps) and is sampled every 400 ps, four samples per 625 MHz word.
//
// Independent expectation: line i's rising sample is the first sample index k
// with k*400 ps - delay_i >= t_rise; with the logic's whole-sample shifts
// (1, 0, 1, 0) the leading time in 100 ps units is the sum over lines of
// (k_i + shift_i), plus a fixed pipeline offset which must be the same for all
// hits: 96, i.e. three vectors of pipeline (gearbox, aligner, edge register).
// ToT is checked exactly. The testbench also checks that the 100 ps code
// tracks the true time (within 1 bin of a straight line), that a pulse during
// the veto is ignored, and that a glitch seen by only some lines is dropped.
module tb_tdc_channel;
  localparam int CW = 32;
  localparam longint SPER = 4000;                  // sample period, 0.1 ps
  localparam longint DLY [4] = '{0, 5044, 1940, 6984};
  localparam int     SHF [4] = '{1, 0, 1, 0};

  logic clk_int = 0, clk_div = 0, rst = 1;
  logic [3:0] q [4];
  logic [2:0] shift [4];
  logic [CW-1:0] coarse = '0;
  logic hit_valid, err_miss, vetoed;
  logic [CW+4:0] hit_time;
  logic [15:0] hit_tot;
  int checks = 0, failures = 0;
  longint m = 0;

  // pulse list
  longint pr [0:1023];
  longint pf [0:1023];
  int     npulse = 0;
  // expected hits
  longint exp_t [$];
  longint exp_tot [$];
  longint exp_true [$];
  int n_hits = 0, n_miss = 0, n_veto = 0;
  bit off_set = 0;
  longint off;

  initial for (int i = 0; i < 4; i++) begin q[i] = '0; shift[i] = 3'(SHF[i]); end

  tdc_channel #(.CW(CW)) dut (
    .clk_int(clk_int), .clk_div(clk_div), .rst(rst), .q(q), .shift(shift), .coarse(coarse),
    .hit_valid(hit_valid), .hit_time(hit_time), .hit_tot(hit_tot),
    .err_miss(err_miss), .vetoed(vetoed));

  initial forever begin
    #0.8 clk_int = 1; if (m % 2 == 0) clk_div = 1;
    #0.8 clk_int = 0; if (m % 2 == 1) clk_div = 0;
  end

  function automatic bit sig(longint t);
    for (int p = 0; p < npulse; p++) if (t >= pr[p] && t < pf[p]) return 1;
    return 0;
  endfunction

  function automatic longint first_k(longint t, int i);   // ceil((t + D)/SPER)
    return (t + DLY[i] + SPER - 1) / SPER;
  endfunction

  always @(posedge clk_int) begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        q[i][j] <= sig((4 * m + j) * SPER - DLY[i]);
    m <= m + 1;
  end
  always @(posedge clk_div) coarse <= coarse + 1;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk_div) begin
    if (err_miss) n_miss++;
    if (vetoed) n_veto++;
    if (!rst && hit_valid) begin
      n_hits++;
      if (exp_t.size() == 0) chk(0, "unexpected hit");
      else begin
        longint et, etot, tru, d;
        et = exp_t.pop_front(); etot = exp_tot.pop_front(); tru = exp_true.pop_front();
        d = longint'(hit_time) - et;
        // the timestamp is attached three vectors (gearbox, aligner, edge
        // register) after the samples entered, and each of the four lines
        // adds 8 samples per vector: offset 3 x 32
        if (!off_set) begin off = 96; off_set = 1; end
        chk(d == off, $sformatf("leading time %0d, expected %0d + offset %0d", hit_time, et, off));
        chk(longint'(hit_tot) == etot, $sformatf("tot %0d exp %0d", hit_tot, etot));
        // 100 ps code against the true time: each line rounds up by less
        // than one 400 ps sample, so the sum lies within 4 x 100 ps
        begin
          longint res;
          res = (longint'(hit_time) - off - 2) * 1000 - tru - (DLY[0] + DLY[1] + DLY[2] + DLY[3]) / 4;
          chk(res >= 0 && res < 4000, $sformatf("code vs true time residual %0d", res));
        end
      end
    end
  end

  initial begin
    longint t;
    t = 200000;   // 20 ns
    // regular pulses, random phase and length
    for (int p = 0; p < 250; p++) begin
      longint len, sr, sf;
      t += 400000 + longint'($urandom % 1000000);            // 40..140 ns gap
      len = 20000 + longint'($urandom % 2000000);            // 2..202 ns
      pr[npulse] = t; pf[npulse] = t + len; npulse++;
      sr = 0; sf = 0;
      for (int i = 0; i < 4; i++) begin
        sr += first_k(t, i) + SHF[i];
        sf += first_k(t + len, i) + SHF[i];
      end
      exp_t.push_back(sr); exp_tot.push_back(sf - sr); exp_true.push_back(t);
      t += len;
      if (p % 50 == 10) begin
        // comparator ringing 10 ns after the falling edge: vetoed
        pr[npulse] = t + 100000; pf[npulse] = t + 130000; npulse++;
        t += 130000;
      end
      if (p % 50 == 30) begin
        // 150 ps glitch: seen by some lines only, or none
        t += 500000;
        pr[npulse] = t; pf[npulse] = t + 1500; npulse++;
      end
    end
    repeat (4) @(negedge clk_div);
    rst = 0;
    wait (m * 4 * SPER > t + 1000000);
    chk(exp_t.size() == 0, $sformatf("%0d hits missing", exp_t.size()));
    chk(n_veto >= 5, "veto exercised");
    $display("hits=%0d vetoed=%0d dropped=%0d offset=%0d", n_hits, n_veto, n_miss, off);
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
