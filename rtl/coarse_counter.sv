// coarse_counter: coarse time base of one bank, in 3.2 ns units.
//
// Every TDC timestamp is {coarse, fine}; the coarse part counts periods of the
// 312.5 MHz logic clock. All clocks of the FPGA derive from the 125 MHz White
// Rabbit clock, so the counters of all banks (and all boards) run at the same
// rate; a time-sync level from the White Rabbit domain, passed through a
// two-flop synchroniser, clears the counter on its rising edge so that they
// also agree in value (up to a fixed latency that calibration removes).
// The sync input and the 32-bit width are this design's choices.
// Timing: coarse is 0 three clk cycles after sync_async rises, then counts.
module coarse_counter #(
  parameter int unsigned CW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          sync_async,
  output logic [CW-1:0] coarse
);
  logic sync_s, sync_d;

  sync_2ff u_sync (.clk(clk), .d(sync_async), .q(sync_s));

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_d <= 1'b0;
      coarse <= '0;
    end else begin
      sync_d <= sync_s;
      if (sync_s && !sync_d) coarse <= '0;
      else                   coarse <= coarse + 1'b1;
    end
  end
endmodule
