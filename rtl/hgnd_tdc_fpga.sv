// hgnd_tdc_fpga: TDC logic of one HGND readout FPGA (Kintex-7 xc7k160t).
//
// Seven I/O banks with 12 TDC channels each (84 channels) measure leading-edge
// time with 100 ps bins and time over threshold of the detector discriminator
// signals. Each bank runs on its own MMCM clocks (625 MHz for the ISERDESE2
// words, 312.5 MHz for the logic) and aligns its BUFG clock phase to its BUFIO
// clock by itself. A calibration pulser with its control sits beside them.
//
// The vendor primitives stay outside this module and meet it at its ports:
// the ISERDESE2 words (tdc_q), the IDELAY tap values (idelay_tap, constant:
// 0, 13, 5, 18 taps of 38.8 ps for lines 0..3, as in the paper), the phase
// alignment OSERDESE2/ISERDESE2 words and the MMCM phase-shift handshakes
// (with the stable window each bank found, pa_win_start/pa_win_len).
// The readout (IPbus over Ethernet in the paper) takes one valid/ready hit
// stream per bank, in that bank's clk_div domain.
// Clocks: clk_int[b]/clk_div[b] of bank b (aligned rising edges), clk_sys the
// 125 MHz White Rabbit clock (control), clk_pls the 31.25 MHz pulser clock.
// Resets are synchronous to their own clocks. time_sync (clk_sys domain)
// clears all coarse counters.
module hgnd_tdc_fpga
  import tdc_pkg::*;
#(
  parameter int unsigned NBANK      = NUM_BANKS,
  parameter int unsigned NCH        = CH_PER_BANK,
  parameter int unsigned SCAN_STEPS = 112,
  parameter int unsigned CHECK_CYC  = 64
) (
  // per-bank clocks and resets
  input  logic [NBANK-1:0] clk_int,
  input  logic [NBANK-1:0] clk_div,
  input  logic [NBANK-1:0] rst_div,
  // control clock (White Rabbit 125 MHz) and pulser clock (31.25 MHz)
  input  logic             clk_sys,
  input  logic             rst_sys,
  input  logic             clk_pls,
  input  logic             rst_pls,
  input  logic             time_sync,
  // ISERDESE2 words and IDELAY settings
  input  logic [3:0]       tdc_q      [NBANK][NCH][LINES],
  output logic [4:0]       idelay_tap [NBANK][NCH][LINES],
  // BUFIO-to-BUFG phase alignment, per bank
  input  logic [NBANK-1:0] pa_start,
  output logic [3:0]       pa_tx      [NBANK],
  input  logic [3:0]       pa_rx      [NBANK],
  output logic [NBANK-1:0] pa_ps_en,
  output logic [NBANK-1:0] pa_ps_incdec,
  input  logic [NBANK-1:0] pa_ps_done,
  output logic [NBANK-1:0] pa_locked,
  output logic [NBANK-1:0] pa_fail,
  output logic [$clog2(SCAN_STEPS + 1)-1:0] pa_win_start [NBANK],
  output logic [$clog2(SCAN_STEPS + 1)-1:0] pa_win_len   [NBANK],
  // readout, one stream per bank
  output logic [NBANK-1:0] hit_valid,
  input  logic [NBANK-1:0] hit_ready,
  output hit_t             hit_data   [NBANK],
  output logic [31:0]      hit_lost   [NBANK],
  output logic [NCH-1:0]   err_miss   [NBANK],
  output logic [NCH-1:0]   vetoed     [NBANK],
  // calibration control (clk_sys domain)
  input  logic             cal_cmd_valid,
  output logic             cal_cmd_ready,
  input  logic             cal_cmd_sel_async,
  input  logic             cal_cmd_xpoint_cal,
  input  logic             cal_cmd_pulser_en,
  input  logic             cal_cmd_up,
  input  logic [9:0]       cal_cmd_steps,
  output logic             cal_sel_async,
  output logic             cal_xpoint_cal,
  output logic             cal_ps_en,
  output logic             cal_ps_incdec,
  input  logic             cal_ps_done,
  output logic signed [15:0] cal_phase,
  output logic             pulse_out
);
  logic pulser_en;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    for (genvar c = 0; c < NCH; c++) begin : g_ch
      for (genvar l = 0; l < LINES; l++) begin : g_l
        assign idelay_tap[b][c][l] = IDELAY_TAP[l];
      end
    end

    tdc_bank #(.NCH(NCH), .CW(COARSE_W), .SCAN_STEPS(SCAN_STEPS), .CHECK_CYC(CHECK_CYC)) u_bank (
      .clk_int(clk_int[b]), .clk_div(clk_div[b]), .rst(rst_div[b]),
      .sync_async(time_sync),
      .tdc_q(tdc_q[b]),
      .pa_start(pa_start[b]), .pa_tx(pa_tx[b]), .pa_rx(pa_rx[b]),
      .ps_en(pa_ps_en[b]), .ps_incdec(pa_ps_incdec[b]), .ps_done(pa_ps_done[b]),
      .pa_locked(pa_locked[b]), .pa_fail(pa_fail[b]),
      .pa_win_start(pa_win_start[b]), .pa_win_len(pa_win_len[b]),
      .hit_valid(hit_valid[b]), .hit_ready(hit_ready[b]), .hit_data(hit_data[b]),
      .hit_lost(hit_lost[b]), .err_miss(err_miss[b]), .vetoed(vetoed[b]));
  end

  cal_ctrl #(.STEP_W(10)) u_cal (
    .clk(clk_sys), .rst(rst_sys),
    .cmd_valid(cal_cmd_valid), .cmd_ready(cal_cmd_ready),
    .cmd_sel_async(cal_cmd_sel_async), .cmd_xpoint_cal(cal_cmd_xpoint_cal),
    .cmd_pulser_en(cal_cmd_pulser_en), .cmd_up(cal_cmd_up), .cmd_steps(cal_cmd_steps),
    .sel_async(cal_sel_async), .xpoint_cal(cal_xpoint_cal), .pulser_en(pulser_en),
    .ps_en(cal_ps_en), .ps_incdec(cal_ps_incdec), .ps_done(cal_ps_done),
    .phase(cal_phase));

  pulser_logic #(.PERIOD_CYC(32), .WIDTH_CYC(5)) u_pulser (
    .clk_pls(clk_pls), .rst(rst_pls), .enable_async(pulser_en), .pulse(pulse_out));
endmodule
