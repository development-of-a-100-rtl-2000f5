// tb_phase_align: phase alignment against a model of the MMCM dynamic phase
// shift and of the OSERDESE2 -> ISERDESE2 loop.
// The MMCM model keeps a phase step p (mod 112); each ps_en request moves it
// by one after a random 3..12 cycle delay and answers with a one-cycle
// ps_done. The loop model returns the transmitted word when p lies in a
// stable window, random words in the unstable range, and (in one case) a
// stable but bit-rotated word, which must count as a failure. Windows of
// random start and length, including one that wraps around the period, must
// end with locked and the phase in the window's middle, start + len/2 (mod
// 112); with no stable window the block must report fail. The scan length
// (cycle count from start to locked) is checked against the scan schedule.
module tb_phase_align;
  localparam int N = 112;
  logic clk = 0, rst = 1, start = 0;
  logic [3:0] pa_tx, pa_rx;
  logic ps_en, ps_incdec, ps_done = 0, busy, locked, fail;
  logic [6:0] win_start, win_len;
  int checks = 0, failures = 0;
  int p = 0;                     // model phase
  int ws = 0, wl = 0;            // stable window
  bit rotated_zone = 0;
  int cyc = 0;
  int pending = -1;              // cycles until ps_done
  bit pend_dir;

  phase_align dut (.clk(clk), .rst(rst), .start(start), .pa_tx(pa_tx), .pa_rx(pa_rx),
    .ps_en(ps_en), .ps_incdec(ps_incdec), .ps_done(ps_done), .busy(busy),
    .locked(locked), .fail(fail), .win_start(win_start), .win_len(win_len));

  always #1.6 clk = ~clk;

  function automatic bit in_win(int ph);
    int d; d = ((ph - ws) % N + N) % N;
    return d < wl;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    ps_done <= 0;
    if (pending == 0) begin
      p = pend_dir ? (p + 1) % N : (p + N - 1) % N;
      ps_done <= 1;
      pending = -1;
    end else if (pending > 0) pending--;
    if (ps_en && !rst) begin
      if (pending != -1) begin failures++; $display("FAIL: request while pending"); end
      pending = 3 + $urandom % 10;
      pend_dir = ps_incdec;
    end
    if (in_win(p))                       pa_rx <= pa_tx;
    else if (rotated_zone && p < 30)     pa_rx <= {pa_tx[2:0], pa_tx[3]};
    else                                 pa_rx <= 4'($urandom);
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic run(int s, int l, bit rot);
    int t0, tgt;
    ws = s; wl = l; rotated_zone = rot;
    p = $urandom % N;                      // unknown starting phase
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    wait (locked || fail);
    @(negedge clk);
    if (l == 0) begin
      chk(fail && !locked, "no window -> fail");
    end else begin
      // window in the scan's own numbering: scan step k is phase p0 + k
      chk(locked, "locked");
      chk(in_win(p), "final phase inside the stable window");
      chk(win_len == 7'(l < N ? l : N), $sformatf("window length %0d exp %0d", win_len, l));
      tgt = (ws + l / 2) % N;
      chk(p == tgt, $sformatf("final phase %0d, expected middle %0d", p, tgt));
      chk(pa_rx == 4'b0011 && pa_tx == 4'b0011, "pattern received at the chosen phase");
      // scan: 112 x (16 settle + 64 check) cycles, 2 x 112 analysis cycles,
      // and up to 111 steps up and 111 down of at most 15 cycles each
      chk(cyc - t0 >= 112 * 80 && cyc - t0 <= 112 * 80 + 2 * 112 + 2 * 111 * 15 + 10, $sformatf("scan took %0d cycles", cyc - t0));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);
    run(20, 30, 0);
    run(100, 25, 0);       // wraps around the end of the period
    run(60, 40, 1);        // with a stable but wrong (rotated) range
    run(5, 1, 0);
    run(0, 0, 0);          // no stable window
    run(70, 11, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
