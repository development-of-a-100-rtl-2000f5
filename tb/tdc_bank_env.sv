// tdc_bank_env: behavioural model of one bank's TDC front end plus a hit
// checker, for the bank and full-FPGA testbenches.
//
// Front end (behavioural model of the board crosspoint, IBUFDS, IDELAYE2 and
// ISERDESE2): each channel carries a list of discriminator pulses, edge times
// in 0.1 ps. Line i sees the signal through 0, 13, 5, 18 IDELAY taps of 38.8 ps
// and is sampled every 400 ps; lines fed from an IBUFDS OB output (2 and 3)
// are delivered inverted. Samples are taken LAG behind the clock edge so
// pulses can be added while the simulation runs. When xpoint_cal is high every
// channel sees the calibration pulser input instead (crosspoint switched).
//
// Checker: for every pulse the expected leading time (100 ps units) is the sum
// over lines of the first sample index past the edge plus the whole-sample
// shifts (1, 0, 1, 0); ToT is the same sum for the falling edge minus it. Hit
// codes are compared up to one offset per bank (pipeline and counter origin),
// learnt from the first hit. Hits lost to a full FIFO show as skipped
// expectations, and their number is reported.
module tdc_bank_env
  import tdc_pkg::*;
#(
  parameter int     NCH = 12,
  parameter longint LAG = 80000          // 8 ns, in 0.1 ps
) (
  input  logic        clk_int,
  input  logic        rst,
  output logic [3:0]  q [NCH][LINES],
  input  logic        xpoint_cal,
  input  logic        pulse_in,
  input  logic        clk_div,
  input  logic        hit_valid,
  input  logic        hit_ready,
  input  hit_t        hit_data
);
  localparam longint SPER = 4000;
  localparam longint DLY [4] = '{0, 5044, 1940, 6984};
  localparam int     SHF [4] = '{1, 0, 1, 0};
  localparam logic [3:0] INV = 4'b1100;
  localparam longint INF = 64'h3fff_ffff_ffff_ffff;

  int checks = 0, failures = 0, hits = 0, cal_hits = 0, skipped = 0;
  longint pr [NCH][$];
  longint pf [NCH][$];
  longint exp_t   [NCH][$];
  longint exp_tot [NCH][$];
  bit     exp_cal [NCH][$];
  longint g0 = 0;                  // time of sample 0
  bit     g0_set = 0;
  longint m = 0;
  bit     off_set = 0;
  longint off;
  longint cal_rise = -1;

  function automatic longint now01();
    return longint'($realtime * 10000.0);
  endfunction

  function automatic longint first_k(longint t, int i);
    longint x; x = t + DLY[i] - g0;
    return (x + SPER - 1) / SPER;
  endfunction

  function automatic void expect_pulse(int ch, longint tr, longint tf, bit cal);
    longint sr, sf;
    sr = 0; sf = 0;
    for (int i = 0; i < 4; i++) begin
      sr += first_k(tr, i) + SHF[i];
      sf += first_k(tf, i) + SHF[i];
    end
    exp_t[ch].push_back(sr);
    exp_tot[ch].push_back(sf - sr);
    exp_cal[ch].push_back(cal);
  endfunction

  // Add a detector pulse on channel ch; tr is absolute time in 0.1 ps and
  // must lie at least LAG in the future of the sampling.
  function automatic void add_pulse(int ch, longint tr, longint tf);
    pr[ch].push_back(tr);
    pf[ch].push_back(tf);
    expect_pulse(ch, tr, tf, 0);
  endfunction

  function automatic bit sig(int ch, longint t);
    for (int p = 0; p < pr[ch].size() && p < 4; p++)
      if (t >= pr[ch][p] && t < pf[ch][p]) return 1;
    return 0;
  endfunction

  // calibration pulser through the crosspoint: all channels see it
  always @(posedge pulse_in) if (xpoint_cal && g0_set) begin
    cal_rise = now01();
    for (int c = 0; c < NCH; c++) begin pr[c].push_back(cal_rise); pf[c].push_back(INF); end
  end
  always @(negedge pulse_in) if (cal_rise >= 0) begin
    for (int c = 0; c < NCH; c++) begin
      pf[c][pf[c].size() - 1] = now01();
      expect_pulse(c, cal_rise, now01(), 1);
    end
    cal_rise = -1;
  end

  always @(posedge clk_int) begin
    longint t0;
    if (!g0_set) begin g0 = now01() - LAG; g0_set = 1; end
    t0 = g0 + m * 4 * SPER;
    for (int c = 0; c < NCH; c++) begin
      // forget pulses that ended well before the samples taken now
      while (pf[c].size() > 0 && pf[c][0] < t0 - 20000) begin void'(pr[c].pop_front()); void'(pf[c].pop_front()); end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          q[c][i][j] <= sig(c, t0 + j * SPER - DLY[i]) ^ INV[i];
    end
    m <= m + 1;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %m @%0t: %s", $realtime, msg); end
  endtask

  always @(posedge clk_div) if (!rst && hit_valid && hit_ready) begin
    int c;
    bit found;
    c = int'(hit_data.ch);
    hits++;
    found = 0;
    if (c >= NCH) chk(0, "channel number out of range");
    else begin
      while (!found && exp_t[c].size() > 0) begin
        longint et, etot, d;
        bit cal;
        et = exp_t[c].pop_front(); etot = exp_tot[c].pop_front(); cal = exp_cal[c].pop_front();
        d = longint'(hit_data.t_lead) - et;
        if (!off_set) begin
          off_set = 1; off = d;
          chk(off % 32 == 0, "offset is whole vectors");
        end
        if (d == off && longint'(hit_data.tot) == etot) begin
          found = 1;
          if (cal) cal_hits++;
        end else begin
          skipped++;
          if (skipped < 3) $display("%m skip ch %0d: exp t=%0d tot=%0d cal=%0d, got t=%0d tot=%0d", c, et + off, etot, cal, hit_data.t_lead, hit_data.tot);
        end
      end
      chk(found, $sformatf("hit ch %0d t=%0d tot=%0d matches an expected pulse (offset %0d, %0d skipped so far)", c, hit_data.t_lead, hit_data.tot, off, skipped));
    end
  end

  // expectations still open whose pulse ended before `tmax`
  function automatic int open_before(longint tmax);
    int n; n = 0;
    for (int c = 0; c < NCH; c++) n += exp_t[c].size();
    return n;
  endfunction
endmodule
