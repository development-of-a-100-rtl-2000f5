// tdc_line_align: whole-sample delay of one TDC line.
//
// IDELAY taps can only give about 0..1.2 ns, and the tap chosen for a line may
// push it more than one 400 ps sample past the others. Such whole-sample parts
// of the line-to-line delay are removed in logic (as the paper does): the
// 8-bit vector stream is delayed by `shift` samples, 0..MAX_SHIFT.
//
// How: the last two vectors form a 16-sample window and the output is the
// 8-sample slice that starts `shift` samples before the current vector.
// Interface: vin/vout are 8-bit vectors, bit 0 earliest. shift is static
// configuration. Latency: one cycle plus `shift` samples.
module tdc_line_align #(
  parameter int unsigned VEC_W     = 8,
  parameter int unsigned MAX_SHIFT = 7
) (
  input  logic                         clk,
  input  logic [$clog2(VEC_W)-1:0]     shift,
  input  logic [VEC_W-1:0]             vin,
  output logic [VEC_W-1:0]             vout
);
  logic [VEC_W-1:0]   vprev;
  logic [2*VEC_W-1:0] window;

  assign window = {vin, vprev};

  always_ff @(posedge clk) begin
    vprev <= vin;
    vout  <= window[VEC_W - int'(shift) +: VEC_W];
  end

  initial assert (MAX_SHIFT < VEC_W) else $error("MAX_SHIFT must be below VEC_W");
endmodule
