// tb_tdc_scans: the calibration and resolution measurements of the TDC, run on
// two channel logic cores with an ideal front-end model.
//
// Front end: as in tb_tdc_channel, line i of a channel sees the discriminator
// signal through its IDELAY (0, 13, 5, 18 taps of 38.8 ps) and is sampled
// every 400 ps (times in 0.1 ps units). Pulses are 50 ns long and 204.8 ns
// (64 vectors) apart, so every pulse gives exactly one hit.
//
// Reference: the width W(r) of each of the four 100 ps bins inside a 400 ps
// sample is worked out from the delays alone, by stepping a time through one
// sample in 0.1 ps steps and sorting it by (sum of line sample indices) mod 4.
// With these taps the widths are 101.6, 104.4, 89.6 and 104.4 ps in some order.
//
// 1. Synchronous time scan: 256 pulses, each 12.5 ps later in phase than the
//    one before (the MMCM pulser's step), over one 3.2 ns vector. The code must
//    never go back, rise by at most one per step and by 32 in total, and each
//    full bin must be as wide as W within one 12.5 ps step.
// 2. Code density test: 2000 pulses at random phase. The bin width
//    100 ps * M * N_bin / N_tot (M = 4 bins per sample) must match W within
//    12 ps (about 3 standard deviations of the count).
// 3. Delay scan between two channels: the second channel's pulse is delayed by
//    -3..3 ns in 10 ps steps (601 points) at random phase. The measured
//    difference must be within 400 ps of the delay at every point, the mean
//    error within 15 ps, and the RMS error close to the quantisation limit
//    of 100 ps / sqrt(6) = 40.8 ps (accepted 30..50 ps).
// The scan sizes follow the measurements these calibrations are made with;
// the pass limits are this testbench's choice.
module tb_tdc_scans;
  localparam int CW = 32;
  localparam longint SPER = 4000;                   // sample period, 0.1 ps
  localparam longint DLY [4] = '{0, 5044, 1940, 6984};
  localparam int     SHF [4] = '{1, 0, 1, 0};
  localparam longint GAP = 2048000;                 // 64 vectors, 204.8 ns
  localparam longint GAP_CODES = 2048;              // the same in 100 ps codes
  localparam longint WID = 500000;                  // 50 ns pulses

  logic clk_int = 0, clk_div = 0, rst = 1;
  logic [3:0] q [2][4];
  logic [2:0] shift [4];
  logic [CW-1:0] coarse = '0;
  logic hit_valid [2], err_miss [2], vetoed [2];
  logic [CW+4:0] hit_time [2];
  logic [15:0] hit_tot [2];
  int checks = 0, failures = 0;
  longint m = 0;

  // pulse lists, in time order, and the first pulse still of interest
  longint pr [2][$];
  longint pf [2][$];
  int     ptr [2] = '{0, 0};
  // hit times as they come out
  longint got [2][$];
  int     n_bad = 0;

  initial for (int i = 0; i < 4; i++) shift[i] = 3'(SHF[i]);

  for (genvar c = 0; c < 2; c++) begin : g_ch
    initial for (int i = 0; i < 4; i++) q[c][i] = '0;
    tdc_channel #(.CW(CW)) dut (
      .clk_int(clk_int), .clk_div(clk_div), .rst(rst), .q(q[c]), .shift(shift),
      .coarse(coarse), .hit_valid(hit_valid[c]), .hit_time(hit_time[c]),
      .hit_tot(hit_tot[c]), .err_miss(err_miss[c]), .vetoed(vetoed[c]));
    always @(posedge clk_div) begin
      if (!rst && hit_valid[c]) got[c].push_back(longint'(hit_time[c]));
      if (!rst && (err_miss[c] || vetoed[c])) n_bad++;
    end
  end

  initial forever begin
    #0.8 clk_int = 1; if (m % 2 == 0) clk_div = 1;
    #0.8 clk_int = 0; if (m % 2 == 1) clk_div = 0;
  end

  function automatic bit sig(int c, longint t);
    for (int p = ptr[c]; p < pr[c].size() && pr[c][p] <= t; p++)
      if (t < pf[c][p]) return 1;
    return 0;
  endfunction

  function automatic longint first_k(longint t, int i);   // ceil((t + D)/SPER)
    return (t + DLY[i] + SPER - 1) / SPER;
  endfunction

  always @(posedge clk_int) begin
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          q[c][i][j] <= sig(c, (4 * m + longint'(j)) * SPER - DLY[i]);
      while (ptr[c] < pf[c].size() && pf[c][ptr[c]] < 4 * m * SPER - 20000) ptr[c]++;
    end
    m <= m + 1;
  end
  always @(posedge clk_div) coarse <= coarse + 1;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic longint now01();
    return 4 * m * SPER;
  endfunction

  // wait until every pulse so far has given its hit
  task automatic drain();
    while (now01() <= pf[0][pf[0].size() - 1] + 1000000 || now01() <= pf[1][pf[1].size() - 1] + 1000000)
      @(posedge clk_div);
    repeat (20) @(posedge clk_div);
  endtask

  function automatic real absr(real x);
    return x < 0 ? -x : x;
  endfunction

  real w_ref [4];

  initial begin
    longint t0;
    // reference bin widths from the line delays
    begin
      longint cnt [4];
      cnt = '{0, 0, 0, 0};
      for (longint t = 0; t < SPER; t++) begin
        longint s;
        s = 0;
        for (int i = 0; i < 4; i++) s += first_k(t, i) + longint'(SHF[i]);
        cnt[2'(s % 4)]++;
      end
      for (int r = 0; r < 4; r++) w_ref[r] = real'(cnt[r]) / 10.0;
      $display("reference bin widths (code mod 4 = 0..3): %.1f %.1f %.1f %.1f ps",
               w_ref[0], w_ref[1], w_ref[2], w_ref[3]);
    end
    repeat (4) @(negedge clk_div);
    rst = 0;
    repeat (20) @(negedge clk_div);

    // ---------------- 1. synchronous time scan, 256 x 12.5 ps
    begin
      longint code [256];
      int     nstep [longint];
      t0 = (now01() / GAP + 2) * GAP;
      for (int s = 0; s < 256; s++) begin
        pr[0].push_back(t0 + s * GAP + s * 125); pf[0].push_back(t0 + s * GAP + s * 125 + WID);
      end
      pr[1].push_back(t0); pf[1].push_back(t0 + WID);
      drain();
      chk(got[0].size() == 256, $sformatf("time scan: %0d hits of 256", got[0].size()));
      if (got[0].size() == 256) begin
        for (int s = 0; s < 256; s++) code[s] = got[0][s] - GAP_CODES * s;
        for (int s = 1; s < 256; s++)
          chk(code[s] - code[s - 1] inside {0, 1}, $sformatf("time scan step %0d: code %0d after %0d", s, code[s], code[s - 1]));
        chk(code[255] - code[0] inside {31, 32}, $sformatf("time scan covers %0d codes over 3.2 ns", code[255] - code[0]));
        for (int s = 0; s < 256; s++) nstep[code[s]]++;
        $write("time scan bin widths (ps):");
        foreach (nstep[c]) if (c != code[0] && c != code[255]) begin
          real w;
          w = 12.5 * nstep[c];
          $write(" %.1f", w);
          chk(absr(w - w_ref[2'(c % 4)]) <= 12.5, $sformatf("time scan bin %0d: %.1f ps, reference %.1f ps", c, w, w_ref[2'(c % 4)]));
        end
        $display("");
      end
      got[0].delete(); got[1].delete();
    end

    // ---------------- 2. code density test, 2000 random phases
    begin
      int  n [4];
      real tau [4], rms, rms_ref;
      n = '{0, 0, 0, 0};
      t0 = (now01() / GAP + 2) * GAP;
      for (int k = 0; k < 2000; k++) begin
        longint t;
        t = t0 + k * GAP + longint'($urandom) % 64'd32000;
        pr[0].push_back(t); pf[0].push_back(t + WID);
      end
      pr[1].push_back(t0); pf[1].push_back(t0 + WID);
      drain();
      chk(got[0].size() == 2000, $sformatf("code density: %0d hits of 2000", got[0].size()));
      foreach (got[0][k]) n[2'(got[0][k] % 4)]++;
      rms = 0; rms_ref = 0;
      for (int r = 0; r < 4; r++) begin
        tau[r] = 100.0 * 4 * n[r] / real'(got[0].size());
        rms += (tau[r] - 100.0) ** 2; rms_ref += (w_ref[r] - 100.0) ** 2;
        chk(absr(tau[r] - w_ref[r]) <= 12.0, $sformatf("code density bin %0d: %.1f ps, reference %.1f ps", r, tau[r], w_ref[r]));
      end
      $display("code density bin widths (ps): %.1f %.1f %.1f %.1f, spread %.1f ps RMS (reference %.1f)",
               tau[0], tau[1], tau[2], tau[3], $sqrt(rms / 4), $sqrt(rms_ref / 4));
      got[0].delete(); got[1].delete();
    end

    // ---------------- 3. delay scan between two channels, -3..3 ns by 10 ps
    begin
      real sum, sum2, worst, mean, rms;
      t0 = (now01() / GAP + 2) * GAP;
      for (int k = 0; k <= 600; k++) begin
        longint t, d;
        d = (longint'(k) - 64'd300) * 64'd100;                        // 10 ps steps
        t = t0 + k * GAP + 40000 + longint'($urandom) % 64'd32000;
        pr[0].push_back(t);     pf[0].push_back(t + WID);
        pr[1].push_back(t + d); pf[1].push_back(t + d + WID);
      end
      drain();
      chk(got[0].size() == 601 && got[1].size() == 601,
          $sformatf("delay scan: %0d and %0d hits of 601", got[0].size(), got[1].size()));
      sum = 0; sum2 = 0; worst = 0;
      if (got[0].size() == 601 && got[1].size() == 601) begin
        for (int k = 0; k <= 600; k++) begin
          real e;
          e = 100.0 * real'(got[1][k] - got[0][k]) - 10.0 * (k - 300);
          sum += e; sum2 += e * e;
          if (absr(e) > worst) worst = absr(e);
        end
        mean = sum / 601; rms = $sqrt(sum2 / 601 - mean * mean);
        $display("delay scan: error mean %.1f ps, RMS %.1f ps (%.1f ps per channel), worst %.1f ps",
                 mean, rms, rms / $sqrt(2.0), worst);
        chk(worst < 400.0, $sformatf("delay scan worst error %.1f ps", worst));
        chk(absr(mean) <= 15.0, $sformatf("delay scan mean error %.1f ps", mean));
        chk(rms >= 30.0 && rms <= 50.0, $sformatf("delay scan RMS %.1f ps, quantisation limit 40.8 ps", rms));
      end
    end

    chk(n_bad == 0, $sformatf("%0d pulses dropped or vetoed", n_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
