// tdc_bank: one FPGA I/O bank of the TDC: 12 channels with their own clocks.
//
// The BUFIO clock network that drives the ISERDESE2 is local to a bank, so
// every bank has its own MMCM, its own BUFG fabric clocks and therefore its own
// phase alignment (paper). A bank holds NCH channel logic cores, the coarse
// counter they share, the BUFIO-to-BUFG phase alignment and the hit merge that
// feeds the readout.
// Lines that come from the inverting (OB) output of an IBUFDS are flipped back
// here according to INV_MASK (bit i for line i). Default: lines 0 and 2 come
// from the first input pair (true and complement output, 0 and 194 ps), lines
// 1 and 3 from the second (104 and 298 ps), so each pair holds a 200 ps step
// as the paper asks and lines 2 and 3 are the complement outputs. The mapping
// of lines to buffer outputs is this design's assumption about the wiring.
// Interface: tdc_q[c][l] is the ISERDESE2 word of line l of channel c (625 MHz
// domain, bit 0 earliest). Everything else runs on clk_div (312.5 MHz).
// The hit stream is valid/ready; hit_data.ch is the channel inside the bank.
// pa_win_start/pa_win_len report the stable window the last phase scan found
// (start counted in steps from where the scan began).
module tdc_bank
  import tdc_pkg::*;
#(
  parameter int unsigned NCH         = 12,
  parameter int unsigned CW          = 32,
  parameter int unsigned VETO_CYC    = 10,
  parameter int unsigned SCAN_STEPS  = 112,
  parameter int unsigned CHECK_CYC   = 64,
  parameter int unsigned FIFO_DEPTH  = 8,
  parameter logic [LINES-1:0] INV_MASK = 4'b1100
) (
  input  logic               clk_int,
  input  logic               clk_div,
  input  logic               rst,
  input  logic               sync_async,
  input  logic [3:0]         tdc_q [NCH][LINES],
  // phase alignment loop
  input  logic               pa_start,
  output logic [3:0]         pa_tx,
  input  logic [3:0]         pa_rx,
  output logic               ps_en,
  output logic               ps_incdec,
  input  logic               ps_done,
  output logic               pa_locked,
  output logic               pa_fail,
  output logic [$clog2(SCAN_STEPS + 1)-1:0] pa_win_start,
  output logic [$clog2(SCAN_STEPS + 1)-1:0] pa_win_len,
  // readout
  output logic               hit_valid,
  input  logic               hit_ready,
  output hit_t               hit_data,
  output logic [31:0]        hit_lost,
  // counters of exceptional events
  output logic [NCH-1:0]     err_miss,
  output logic [NCH-1:0]     vetoed
);

  logic [CW-1:0]   coarse;
  logic [NCH-1:0]  ch_valid;
  hit_t            ch_hit [NCH];
  logic [2:0]      shift [LINES];
  logic            pa_busy;

  for (genvar l = 0; l < LINES; l++) begin : g_shift
    assign shift[l] = LINE_SHIFT[l];
  end

  coarse_counter #(.CW(CW)) u_coarse (
    .clk(clk_div), .rst(rst), .sync_async(sync_async), .coarse(coarse));

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [3:0]          q [LINES];
    logic [CW+4:0]       t;
    logic [TOT_W-1:0]    tot;
    for (genvar l = 0; l < LINES; l++) begin : g_l
      assign q[l] = INV_MASK[l] ? ~tdc_q[c][l] : tdc_q[c][l];
    end
    tdc_channel #(.CW(CW), .VETO_CYC(VETO_CYC), .TOT_W(TOT_W)) u_ch (
      .clk_int(clk_int), .clk_div(clk_div), .rst(rst),
      .q(q), .shift(shift), .coarse(coarse),
      .hit_valid(ch_valid[c]), .hit_time(t), .hit_tot(tot),
      .err_miss(err_miss[c]), .vetoed(vetoed[c]));
    always_comb begin
      ch_hit[c]        = '0;
      ch_hit[c].t_lead = (COARSE_W+5)'(t);
      ch_hit[c].tot    = tot;
    end
  end

  phase_align #(.PAT_W(4), .PATTERN(4'b0011), .SCAN_STEPS(SCAN_STEPS),
                .CHECK_CYC(CHECK_CYC)) u_pa (
    .clk(clk_div), .rst(rst), .start(pa_start),
    .pa_tx(pa_tx), .pa_rx(pa_rx),
    .ps_en(ps_en), .ps_incdec(ps_incdec), .ps_done(ps_done),
    .busy(pa_busy), .locked(pa_locked), .fail(pa_fail),
    .win_start(pa_win_start), .win_len(pa_win_len));

  hit_arbiter #(.N(NCH), .DEPTH(FIFO_DEPTH)) u_arb (
    .clk(clk_div), .rst(rst),
    .in_valid(ch_valid), .in_data(ch_hit),
    .out_valid(hit_valid), .out_ready(hit_ready), .out_data(hit_data),
    .lost(hit_lost));
endmodule
