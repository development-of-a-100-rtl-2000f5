// pulser_logic: calibration pulse shaper on the pulser MMCM's 31.25 MHz clock.
//
// For calibration the crosspoint switch connects every TDC channel to this
// output. The fine position of the pulses is set by the MMCM phase shift
// (12.5 ps steps) and by which source clock feeds the MMCM (White Rabbit clock
// for pulses synchronous to the TDC, a free-running oscillator for the code
// density test); this block only shapes them: while enabled it drives a pulse
// of WIDTH_CYC clock periods every PERIOD_CYC periods. The paper names the
// block; period and width are this design's choices (1 us and 160 ns, close to
// a 150 ns detector pulse).
// Interface: enable_async comes from another clock domain and is synchronised
// here. pulse is registered; the first pulse starts 3 cycles after the enable
// is seen, and a pulse in progress is always completed.
module pulser_logic #(
  parameter int unsigned PERIOD_CYC = 32,
  parameter int unsigned WIDTH_CYC  = 5
) (
  input  logic clk_pls,
  input  logic rst,
  input  logic enable_async,
  output logic pulse
);
  localparam int unsigned PW = $clog2(PERIOD_CYC);

  logic          en_s;
  logic [PW-1:0] phase;
  logic          running;

  sync_2ff u_sync (.clk(clk_pls), .d(enable_async), .q(en_s));

  always_ff @(posedge clk_pls) begin
    if (rst) begin
      phase   <= '0;
      running <= 1'b0;
      pulse   <= 1'b0;
    end else begin
      if (!running) begin
        phase   <= '0;
        running <= en_s;
        pulse   <= 1'b0;
      end else begin
        pulse <= (phase < PW'(WIDTH_CYC));
        if (phase == PW'(PERIOD_CYC - 1)) begin
          phase   <= '0;
          running <= en_s;
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end

  initial assert (WIDTH_CYC > 0 && WIDTH_CYC < PERIOD_CYC) else $error("bad pulse width");
endmodule
