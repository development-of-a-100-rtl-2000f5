// tdc_gearbox: 4-bit, 625 MHz to 8-bit, 312.5 MHz for one TDC line.
//
// The ISERDESE2 of a line delivers 4 oversampled bits every 1.6 ns (clk_int,
// 625 MHz). To run the TDC logic at half that rate, two consecutive 4-bit
// samples are joined into one 8-bit vector that covers 3.2 ns (the paper's
// scheme). The previous sample is held in a clk_int register; on every
// clk_div edge the vector {current, previous} is captured.
//
// Interface: q is the ISERDESE2 word, bit 0 the earliest sample. vec has bit 0
// as the earliest of the 8 samples. clk_div must be derived from the same MMCM
// as clk_int with aligned rising edges (this design's assumption; the paper
// only shows both clocks entering the logic core). Latency: one clk_div cycle.
module tdc_gearbox #(
  parameter int unsigned IN_W  = 4,
  parameter int unsigned OUT_W = 8
) (
  input  logic             clk_int,
  input  logic             clk_div,
  input  logic [IN_W-1:0]  q,
  output logic [OUT_W-1:0] vec
);
  logic [IN_W-1:0] q_prev;

  always_ff @(posedge clk_int) q_prev <= q;

  always_ff @(posedge clk_div) vec <= {q, q_prev};

  initial assert (OUT_W == 2 * IN_W) else $error("OUT_W must be 2*IN_W");
endmodule
