// tb_tdc_bank: one bank of 12 channels, end to end.
// 1. Phase alignment against the MMCM/loop model: must lock in the middle of
//    the model's stable window.
// 2. Time sync, then random detector pulses on all 12 channels (random phase,
//    2..200 ns long, 40..400 ns apart, some with comparator ringing inside the
//    veto, some 150 ps glitches); every hit must match its pulse exactly (see
//    tdc_bank_env) and come out tagged with its channel, under random
//    back-pressure on the readout.
// 3. Readout stalled while pulses continue: per-channel FIFOs overflow, and the
//    hits missing from the stream must equal the bank's lost counter.
module tb_tdc_bank;
  import tdc_pkg::*;
  localparam int NCH = 12;
  logic clk_int = 0, clk_div = 0, rst = 1, sync_async = 0;
  logic [3:0] tdc_q [NCH][LINES];
  logic pa_start = 0;
  logic [3:0] pa_tx, pa_rx;
  logic ps_en, ps_incdec, ps_done, pa_locked, pa_fail;
  logic [6:0] pa_win_start, pa_win_len;
  logic hit_valid, hit_ready = 1;
  hit_t hit_data;
  logic [31:0] hit_lost;
  logic [NCH-1:0] err_miss, vetoed;
  int checks = 0, failures = 0;
  int n_veto = 0, n_miss = 0, n_stall = 0;
  int mc = 0;

  tdc_bank #(.NCH(NCH)) dut (
    .clk_int(clk_int), .clk_div(clk_div), .rst(rst), .sync_async(sync_async), .tdc_q(tdc_q),
    .pa_start(pa_start), .pa_tx(pa_tx), .pa_rx(pa_rx), .ps_en(ps_en), .ps_incdec(ps_incdec),
    .ps_done(ps_done), .pa_locked(pa_locked), .pa_fail(pa_fail),
    .pa_win_start(pa_win_start), .pa_win_len(pa_win_len),
    .hit_valid(hit_valid), .hit_ready(hit_ready), .hit_data(hit_data), .hit_lost(hit_lost),
    .err_miss(err_miss), .vetoed(vetoed));

  tdc_bank_env #(.NCH(NCH)) env (
    .clk_int(clk_int), .rst(rst), .q(tdc_q), .xpoint_cal(1'b0), .pulse_in(1'b0),
    .clk_div(clk_div), .hit_valid(hit_valid), .hit_ready(hit_ready), .hit_data(hit_data));

  mmcm_ps_model #(.N(112), .WS(90), .WL(40)) mmcm (
    .clk(clk_div), .ps_en(ps_en), .ps_incdec(ps_incdec), .ps_done(ps_done),
    .pa_tx(pa_tx), .pa_rx(pa_rx));

  initial forever begin
    #0.8 clk_int = 1; if (mc % 2 == 0) clk_div = 1;
    #0.8 clk_int = 0; if (mc % 2 == 1) clk_div = 0; mc++;
  end

  always @(posedge clk_div) if (!rst) begin
    n_veto += $countones(vetoed);
    n_miss += $countones(err_miss);
    if (hit_valid && !hit_ready) n_stall++;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint now01(); return longint'($realtime * 10000.0); endfunction

  // random pulses on all channels over `dur` (0.1 ps), starting 20 ns ahead
  task automatic pulses(longint dur, int ring_every, int glitch_every);
    longint tend;
    tend = now01() + 200000 + dur;
    for (int c = 0; c < NCH; c++) begin
      longint t; int k;
      t = now01() + 200000 + longint'($urandom % 400000);
      k = 0;
      while (t < tend) begin
        longint len;
        len = 20000 + longint'($urandom % 2000000);
        env.add_pulse(c, t, t + len);
        t += len;
        if (ring_every > 0 && k % ring_every == 1) begin
          env.pr[c].push_back(t + 100000); env.pf[c].push_back(t + 130000); t += 130000;
        end
        if (glitch_every > 0 && k % glitch_every == 2) begin
          env.pr[c].push_back(t + 400000); env.pf[c].push_back(t + 401500); t += 1000000;
        end
        t += 400000 + longint'($urandom % 3600000);
        k++;
      end
    end
  endtask

  int s0;
  initial begin
    for (int c = 0; c < NCH; c++) for (int l = 0; l < 4; l++) tdc_q[c][l] = '0;
    repeat (4) @(negedge clk_div);
    rst = 0;
    // 1. phase alignment
    @(negedge clk_div); pa_start = 1; @(negedge clk_div); pa_start = 0;
    wait (pa_locked || pa_fail);
    @(negedge clk_div);
    chk(pa_locked && !pa_fail, "bank phase aligned");
    chk(mmcm.phase == (90 + 20) % 112, $sformatf("phase %0d in window middle", mmcm.phase));
    chk(pa_win_len == 40, $sformatf("window length %0d reported", pa_win_len));
    chk(mmcm.errors == 0, "phase-shift handshake");
    // time sync
    sync_async = 1; repeat (5) @(negedge clk_div); sync_async = 0;
    // 2. normal running with random back-pressure
    fork
      pulses(64'd100_000_000, 5, 7);          // 10 us
      begin
        repeat (3300) begin @(negedge clk_div); hit_ready = ($urandom % 8 != 0); end
      end
    join
    hit_ready = 1;
    repeat (2000) @(negedge clk_div);
    chk(env.skipped == 0 && hit_lost == 0, "no hit lost in normal running");
    // 3. stall the readout while pulses keep coming
    s0 = env.skipped;
    hit_ready = 0;
    pulses(64'd40_000_000, 0, 0);               // 4 us, about 20 hits per channel
    repeat (1400) @(negedge clk_div);
    hit_ready = 1;
    repeat (2000) @(negedge clk_div);
    chk(hit_lost > 0, "FIFO overflow exercised");
    // hits dropped at a full FIFO are either skipped before a later hit of
    // their channel or are the last expected ones of the channel
    chk(env.skipped - s0 + env.open_before(0) == int'(hit_lost),
        $sformatf("missing hits %0d + %0d = lost counter %0d", env.skipped - s0, env.open_before(0), hit_lost));
    chk(n_veto > 0, "veto exercised");
    chk(n_miss > 0, "glitch dropped");
    chk(n_stall > 0, "back-pressure exercised");
    chk(env.hits > 300, $sformatf("hits %0d", env.hits));
    $display("hits=%0d lost=%0d vetoed=%0d dropped=%0d stalls=%0d", env.hits, hit_lost, n_veto, n_miss, n_stall);
    checks += env.checks; failures += env.failures;
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
