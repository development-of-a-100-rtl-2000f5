// tdc_edge_detect: rising and falling edge of one TDC line per 3.2 ns vector.
//
// Following the paper, the first set bit after a clear one marks the rising
// edge and the last set bit the falling edge. The last sample of the previous
// vector is kept, so the 9-sample window {vec, last} shows edges that fall on
// a vector boundary. The rising edge is the first 0->1 step in the window, the
// falling edge the last 1->0 step; further steps inside one vector (a glitch
// shorter than 3.2 ns) are merged.
//
// Times are in 400 ps units: {coarse, position}, where position is the index
// of the first sample at the new level (0..7). A falling edge after a rising
// edge in the same vector is reported with both strobes set; fall_after_rise
// tells whether the falling edge closes the pulse that rose in this vector.
// Interface: one-cycle strobes, registered, one cycle after vec.
module tdc_edge_detect #(
  parameter int unsigned VEC_W = 8,
  parameter int unsigned CW    = 32
) (
  input  logic                          clk,
  input  logic [VEC_W-1:0]              vec,
  input  logic [CW-1:0]                 coarse,
  output logic                          rise,
  output logic [CW+$clog2(VEC_W)-1:0]   rise_ts,
  output logic                          fall,
  output logic [CW+$clog2(VEC_W)-1:0]   fall_ts,
  output logic                          fall_after_rise
);
  localparam int unsigned PW = $clog2(VEC_W);

  logic             last;
  logic [VEC_W:0]   win;
  logic             r_any, f_any;
  logic [PW-1:0]    r_pos, f_pos;

  assign win = {vec, last};

  always_comb begin
    r_any = 1'b0;
    f_any = 1'b0;
    r_pos = '0;
    f_pos = '0;
    // first 0->1 step, scanning from the latest sample down to the earliest
    for (int i = VEC_W - 1; i >= 0; i--) begin
      if (!win[i] && win[i+1]) begin
        r_any = 1'b1;
        r_pos = PW'(i);
      end
    end
    // last 1->0 step, scanning from the earliest sample up
    for (int i = 0; i < VEC_W; i++) begin
      if (win[i] && !win[i+1]) begin
        f_any = 1'b1;
        f_pos = PW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    last            <= vec[VEC_W-1];
    rise            <= r_any;
    fall            <= f_any;
    rise_ts         <= {coarse, r_pos};
    fall_ts         <= {coarse, f_pos};
    fall_after_rise <= r_any && f_any && (f_pos > r_pos);
  end
endmodule
