// tdc_channel: the logic core of one 100 ps TDC channel.
//
// A channel's LVDS signal enters the FPGA on two differential inputs; the true
// and complement outputs of both input buffers give four lines, each with its
// own IDELAY and ISERDESE2 (outside this module). Here each line passes a
// gearbox (4 bits at 625 MHz to 8 bits at 312.5 MHz), a whole-sample aligner
// and an edge detector; the hit builder merges the four lines into a 100 ps
// leading-edge time and a time over threshold.
// Lines fed from an IBUFDS OB output arrive inverted; the caller passes the
// samples already in signal polarity (the inversion mask is a parameter of the
// bank).
// Interface: q[i] are the 4-bit ISERDESE2 words of line i (bit 0 earliest),
// shift[i] its whole-sample delay, coarse the bank's coarse time. Hits come out
// as one-cycle strobes in the clk_div domain, about 5 cycles after the last
// falling edge has been sampled.
module tdc_channel
  import tdc_pkg::LINES;
#(
  parameter int unsigned CW          = 32,
  parameter int unsigned VETO_CYC    = 10,
  parameter int unsigned EDGE_WIN    = 3,
  parameter int unsigned MAX_TOT_CYC = 1024,
  parameter int unsigned TOT_W       = 16
) (
  input  logic              clk_int,
  input  logic              clk_div,
  input  logic              rst,
  input  logic [3:0]        q     [LINES],
  input  logic [2:0]        shift [LINES],
  input  logic [CW-1:0]     coarse,
  output logic              hit_valid,
  output logic [CW+4:0]     hit_time,
  output logic [TOT_W-1:0]  hit_tot,
  output logic              err_miss,
  output logic              vetoed
);
  logic [7:0]    vec     [LINES];
  logic [7:0]    avec    [LINES];
  logic [LINES-1:0] rise, fall, far;
  logic [CW+2:0] rise_ts [LINES];
  logic [CW+2:0] fall_ts [LINES];

  for (genvar i = 0; i < LINES; i++) begin : g_line
    tdc_gearbox #(.IN_W(4), .OUT_W(8)) u_gear (
      .clk_int(clk_int), .clk_div(clk_div), .q(q[i]), .vec(vec[i]));
    tdc_line_align #(.VEC_W(8), .MAX_SHIFT(7)) u_align (
      .clk(clk_div), .shift(shift[i]), .vin(vec[i]), .vout(avec[i]));
    tdc_edge_detect #(.VEC_W(8), .CW(CW)) u_edge (
      .clk(clk_div), .vec(avec[i]), .coarse(coarse),
      .rise(rise[i]), .rise_ts(rise_ts[i]), .fall(fall[i]), .fall_ts(fall_ts[i]),
      .fall_after_rise(far[i]));
  end

  tdc_hit_builder #(
    .CW(CW), .VETO_CYC(VETO_CYC), .EDGE_WIN(EDGE_WIN),
    .MAX_TOT_CYC(MAX_TOT_CYC), .TOT_W(TOT_W)
  ) u_hit (
    .clk(clk_div), .rst(rst),
    .rise(rise), .rise_ts(rise_ts), .fall(fall), .fall_ts(fall_ts),
    .fall_after_rise(far),
    .hit_valid(hit_valid), .hit_time(hit_time), .hit_tot(hit_tot),
    .err_miss(err_miss), .vetoed(vetoed));
endmodule
