// tb_hgnd_tdc_fpga: the whole FPGA (7 banks x 12 channels, default
// parameters) end to end, with a front-end model and checker per bank
// (tdc_bank_env) and an MMCM phase-shift model per bank and for the pulser.
// Each bank runs on its own clocks, offset in phase from the others.
//  1. All banks align their BUFG phase (each model has its own stable window).
//  2. Time sync clears the coarse counters; the first hits must carry small
//     times.
//  3. Detector pulses on all 84 channels with random back-pressure, comparator
//     ringing inside the veto and short glitches; every hit must match.
//  4. Calibration mode: the crosspoint routes the pulser to every channel, the
//     pulser MMCM phase is stepped; each channel must measure the pulser.
//  5. Bank 0's readout stalls: its FIFOs overflow and the lost count must equal
//     the missing hits.
// Each of these mechanisms is counted, and one that never happened is a
// failure.
module tb_hgnd_tdc_fpga;
  import tdc_pkg::*;
  localparam int NB = NUM_BANKS;
  localparam int NC = CH_PER_BANK;

  logic [NB-1:0] clk_int = '0, clk_div = '0, rst_div = '1;
  logic clk_sys = 0, rst_sys = 1, clk_pls = 0, rst_pls = 1, time_sync = 0;
  logic [3:0] tdc_q [NB][NC][LINES];
  logic [4:0] idelay_tap [NB][NC][LINES];
  logic [NB-1:0] pa_start = '0;
  logic [3:0] pa_tx [NB];
  logic [3:0] pa_rx [NB];
  logic [NB-1:0] pa_ps_en, pa_ps_incdec, pa_ps_done, pa_locked, pa_fail;
  logic [6:0] pa_win_start [NB];
  logic [6:0] pa_win_len [NB];
  logic [NB-1:0] hit_valid, hit_ready = '1;
  hit_t hit_data [NB];
  logic [31:0] hit_lost [NB];
  logic [NC-1:0] err_miss [NB];
  logic [NC-1:0] vetoed [NB];
  logic cal_cmd_valid = 0, cal_cmd_ready, c_async = 0, c_xp = 0, c_pen = 0, c_up = 0;
  logic [9:0] c_steps = '0;
  logic cal_sel_async, cal_xpoint_cal, cal_ps_en, cal_ps_incdec, cal_ps_done = 0;
  logic signed [15:0] cal_phase;
  logic pulse_out;

  int checks = 0, failures = 0;
  int env_checks [NB], env_failures [NB], env_hits [NB], env_cal [NB], env_skip [NB], env_open [NB];
  int n_veto = 0, n_miss = 0, n_stall = 0;
  longint min_t_after_sync = -1;

  hgnd_tdc_fpga dut (
    .clk_int(clk_int), .clk_div(clk_div), .rst_div(rst_div),
    .clk_sys(clk_sys), .rst_sys(rst_sys), .clk_pls(clk_pls), .rst_pls(rst_pls), .time_sync(time_sync),
    .tdc_q(tdc_q), .idelay_tap(idelay_tap),
    .pa_start(pa_start), .pa_tx(pa_tx), .pa_rx(pa_rx), .pa_ps_en(pa_ps_en), .pa_ps_incdec(pa_ps_incdec),
    .pa_ps_done(pa_ps_done), .pa_locked(pa_locked), .pa_fail(pa_fail),
    .pa_win_start(pa_win_start), .pa_win_len(pa_win_len),
    .hit_valid(hit_valid), .hit_ready(hit_ready), .hit_data(hit_data), .hit_lost(hit_lost),
    .err_miss(err_miss), .vetoed(vetoed),
    .cal_cmd_valid(cal_cmd_valid), .cal_cmd_ready(cal_cmd_ready), .cal_cmd_sel_async(c_async),
    .cal_cmd_xpoint_cal(c_xp), .cal_cmd_pulser_en(c_pen), .cal_cmd_up(c_up), .cal_cmd_steps(c_steps),
    .cal_sel_async(cal_sel_async), .cal_xpoint_cal(cal_xpoint_cal), .cal_ps_en(cal_ps_en),
    .cal_ps_incdec(cal_ps_incdec), .cal_ps_done(cal_ps_done), .cal_phase(cal_phase),
    .pulse_out(pulse_out));

  // control clock 125 MHz
  always #4 clk_sys = ~clk_sys;

  // pulser clock 31.25 MHz; every phase step of its MMCM delays it 12.5 ps
  int pls_shift = 0, pls_pending = -1;
  bit pls_dir;
  initial forever begin
    #16 clk_pls = ~clk_pls;
    if (pls_shift != 0) begin
      #(0.0125 * pls_shift);
      pls_shift = 0;
    end
  end
  always @(posedge clk_sys) begin
    cal_ps_done <= 0;
    if (pls_pending == 0) begin cal_ps_done <= 1; pls_pending = -1; pls_shift += pls_dir ? 1 : -1; end
    else if (pls_pending > 0) pls_pending--;
    if (cal_ps_en) begin pls_pending = 3 + $urandom % 5; pls_dir = cal_ps_incdec; end
  end

  // a small pulse-making helper per bank, triggered by the main sequence
  event go_pulses;
  longint p_dur;
  int p_ring, p_glitch;

  function automatic longint now01(); return longint'($realtime * 10000.0); endfunction

  for (genvar b = 0; b < NB; b++) begin : g_b
    int mc = 0;
    initial begin
      #(0.213 * b);
      forever begin
        #0.8 clk_int[b] = 1; if (mc % 2 == 0) clk_div[b] = 1;
        #0.8 clk_int[b] = 0; if (mc % 2 == 1) clk_div[b] = 0; mc++;
      end
    end

    tdc_bank_env #(.NCH(NC)) env (
      .clk_int(clk_int[b]), .rst(rst_div[b]), .q(tdc_q[b]), .xpoint_cal(cal_xpoint_cal),
      .pulse_in(pulse_out), .clk_div(clk_div[b]), .hit_valid(hit_valid[b]),
      .hit_ready(hit_ready[b]), .hit_data(hit_data[b]));

    mmcm_ps_model #(.N(112), .WS(10 + 13 * b), .WL(20 + 3 * b)) mmcm (
      .clk(clk_div[b]), .ps_en(pa_ps_en[b]), .ps_incdec(pa_ps_incdec[b]), .ps_done(pa_ps_done[b]),
      .pa_tx(pa_tx[b]), .pa_rx(pa_rx[b]));

    always @(go_pulses) begin
      longint tend;
      tend = now01() + 200000 + p_dur;
      for (int c = 0; c < NC; c++) begin
        longint t; int k;
        t = now01() + 200000 + longint'($urandom % 400000);
        k = 0;
        while (t < tend) begin
          longint len;
          len = 20000 + longint'($urandom % 2000000);
          env.add_pulse(c, t, t + len);
          t += len;
          if (p_ring > 0 && k % p_ring == 1) begin
            env.pr[c].push_back(t + 100000); env.pf[c].push_back(t + 130000); t += 130000;
          end
          if (p_glitch > 0 && k % p_glitch == 2) begin
            env.pr[c].push_back(t + 400000); env.pf[c].push_back(t + 401500); t += 1000000;
          end
          t += 400000 + longint'($urandom % 3600000);
          k++;
        end
      end
    end

    always @(posedge clk_div[b]) if (!rst_div[b]) begin
      n_veto += $countones(vetoed[b]);
      n_miss += $countones(err_miss[b]);
      if (hit_valid[b] && !hit_ready[b]) n_stall++;
      if (hit_valid[b] && hit_ready[b] && (min_t_after_sync < 0 || longint'(hit_data[b].t_lead) < min_t_after_sync))
        min_t_after_sync = longint'(hit_data[b].t_lead);
    end

    always @* begin
      env_checks[b] = env.checks; env_failures[b] = env.failures; env_hits[b] = env.hits;
      env_cal[b] = env.cal_hits; env_skip[b] = env.skipped;
    end
    always @(posedge clk_sys) env_open[b] = env.open_before(0);
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cal_cmd(bit xp, bit pen, bit up, int steps);
    wait (cal_cmd_ready); @(negedge clk_sys);
    c_xp = xp; c_pen = pen; c_up = up; c_steps = 10'(steps); c_async = 0;
    cal_cmd_valid = 1; @(negedge clk_sys); cal_cmd_valid = 0;
    wait (cal_cmd_ready); @(negedge clk_sys);
  endtask

  function automatic int sum(int a [NB]);
    int s; s = 0; foreach (a[i]) s += a[i]; return s;
  endfunction

  initial begin
    int s0, t_sync_cyc;
    int hits0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++) for (int l = 0; l < 4; l++) tdc_q[b][c][l] = '0;
    #40;
    rst_div = '0; rst_sys = 0; rst_pls = 0;
    // IDELAY settings
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++)
      chk(idelay_tap[b][c][0] == 0 && idelay_tap[b][c][1] == 13 && idelay_tap[b][c][2] == 5 && idelay_tap[b][c][3] == 18, "IDELAY taps");
    // 1. phase alignment of every bank
    #10 pa_start = '1; #10 pa_start = '0;
    wait (&(pa_locked | pa_fail));
    #10;
    chk(&pa_locked && pa_fail == '0, "all banks phase aligned");
    chk(g_b[0].mmcm.phase == (10 + 10) % 112 && g_b[6].mmcm.phase == (10 + 78 + 19) % 112, "phase in window middle (banks 0, 6)");
    for (int b = 0; b < NB; b++)
      chk(pa_win_len[b] == 7'(20 + 3 * b), $sformatf("bank %0d reports window length %0d", b, pa_win_len[b]));
    // 2. time sync
    @(negedge clk_sys) time_sync = 1; repeat (4) @(negedge clk_sys); time_sync = 0;
    min_t_after_sync = -1;
    // 3. detector pulses, random back-pressure
    p_dur = 64'd50_000_000; p_ring = 4; p_glitch = 6;
    -> go_pulses;
    repeat (750) begin @(negedge clk_sys); for (int b = 0; b < NB; b++) hit_ready[b] = ($urandom % 6 != 0); end
    hit_ready = '1;
    #1000;
    chk(min_t_after_sync >= 0 && min_t_after_sync < 32 * 2000, $sformatf("first hit time %0d after sync", min_t_after_sync));
    chk(sum(env_skip) == 0, "no hit lost in normal running");
    hits0 = sum(env_hits);
    // 4. calibration: pulser to every channel, phase moved by 40 x 12.5 ps
    cal_cmd(1, 1, 1, 40);
    chk(cal_phase == 40 && cal_xpoint_cal, "pulser phase moved");
    #5000;
    cal_cmd(0, 0, 0, 0);
    #1500;
    chk(sum(env_cal) >= NB * NC * 4, $sformatf("calibration hits %0d", sum(env_cal)));
    chk(sum(env_skip) == 0, "no hit lost in calibration");
    // 5. bank 0 readout stalled
    s0 = sum(env_skip);
    hit_ready[0] = 0;
    p_dur = 64'd30_000_000; p_ring = 0; p_glitch = 0;
    -> go_pulses;
    #4000;
    hit_ready[0] = 1;
    #8000;
    chk(hit_lost[0] > 0, "bank 0 FIFO overflow");
    for (int b = 1; b < NB; b++) chk(hit_lost[b] == 0, "other banks lose nothing");
    chk(env_skip[0] + env_open[0] == int'(hit_lost[0]), $sformatf("bank 0: missing %0d + %0d = lost %0d", env_skip[0], env_open[0], hit_lost[0]));
    for (int b = 1; b < NB; b++) chk(env_open[b] == 0 && env_skip[b] == 0, $sformatf("bank %0d: all hits seen", b));
    chk(n_veto > 0, "veto");
    chk(n_miss > 0, "glitch dropped");
    chk(n_stall > 0, "back-pressure");
    $display("hits=%0d (cal %0d) lost=%0d vetoed=%0d dropped=%0d stalls=%0d locked=%b",
             sum(env_hits), sum(env_cal), hit_lost[0], n_veto, n_miss, n_stall, pa_locked);
    checks += sum(env_checks); failures += sum(env_failures);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
