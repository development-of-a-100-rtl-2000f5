// tdc_pkg: types and constants shared by the HGND FPGA TDC.
//
// A TDC channel is four "lines": copies of one discriminator signal, each sampled
// by an ISERDESE2 in oversample mode (4 samples per 1.6 ns period = 400 ps per
// sample). IDELAY taps shift the lines by about 0/100/200/300 ps modulo 400 ps,
// so adding the four 400 ps line times gives a time in 100 ps units.
// The numbers of lines, samples, banks and channels and the IDELAY taps follow
// the paper; timestamp widths and the hit record layout are this design's choice.
package tdc_pkg;

  localparam int unsigned LINES      = 4;   // TDC lines per channel
  localparam int unsigned SER_W      = 4;   // ISERDESE2 samples per 625 MHz period
  localparam int unsigned VEC_W      = 8;   // samples per 312.5 MHz vector (3.2 ns)
  localparam int unsigned CH_PER_BANK = 12; // channels per FPGA bank
  localparam int unsigned NUM_BANKS  = 7;   // banks used per FPGA (84 channels)
  localparam int unsigned COARSE_W   = 32;  // coarse counter width (3.2 ns units)
  localparam int unsigned TOT_W      = 16;  // time-over-threshold width (100 ps units)
  localparam int unsigned CHID_W     = 4;   // channel number inside a bank

  // IDELAYE2 tap per line (38.8 ps/tap): 0, 13*38.8-400=104, 5*38.8=194,
  // 18*38.8-400=298 ps.
  localparam logic [4:0] IDELAY_TAP [LINES] = '{5'd0, 5'd13, 5'd5, 5'd18};
  // Lines 1 and 3 are one whole 400 ps sample late after their IDELAY, so the
  // other two lines are delayed by one sample in logic to line them up.
  localparam logic [2:0] LINE_SHIFT [LINES] = '{3'd1, 3'd0, 3'd1, 3'd0};

  // One measured hit: leading-edge time (100 ps units, the sum of the four
  // line times in 400 ps units) and time over threshold (100 ps units).
  typedef struct packed {
    logic [CHID_W-1:0]     ch;
    logic [COARSE_W+4:0]   t_lead;
    logic [TOT_W-1:0]      tot;
  } hit_t;

endpackage
