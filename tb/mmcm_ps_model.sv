// mmcm_ps_model: behavioural model, for testbenches, of an MMCM's dynamic
// phase shift together with a bank's OSERDESE2 -> ISERDESE2 alignment loop.
// The phase is a step number 0..N-1 (one clock period). A ps_en request moves
// it by one step (ps_incdec = 1: up) and is answered by a one-cycle ps_done
// after 3..12 cycles. The loop returns the transmitted word while the phase is
// inside the stable window [WS, WS+WL) (mod N) and random words otherwise.
module mmcm_ps_model #(
  parameter int N  = 112,
  parameter int WS = 30,
  parameter int WL = 25
) (
  input  logic       clk,
  input  logic       ps_en,
  input  logic       ps_incdec,
  output logic       ps_done,
  input  logic [3:0] pa_tx,
  output logic [3:0] pa_rx
);
  int  phase = 0;
  int  pending = -1;
  bit  dir;
  int  errors = 0;

  initial begin ps_done = 0; pa_rx = '0; phase = $urandom % N; end

  function automatic bit stable(int ph);
    int d; d = ((ph - WS) % N + N) % N;
    return d < WL;
  endfunction

  always @(posedge clk) begin
    ps_done <= 0;
    if (pending == 0) begin
      phase = dir ? (phase + 1) % N : (phase + N - 1) % N;
      ps_done <= 1;
      pending = -1;
    end else if (pending > 0) pending--;
    if (ps_en) begin
      if (pending != -1) errors++;
      pending = 3 + $urandom % 10;
      dir = ps_incdec;
    end
    pa_rx <= stable(phase) ? pa_tx : 4'($urandom);
  end
endmodule
