// phase_align: BUFIO-to-BUFG clock phase alignment of one FPGA bank.
//
// The ISERDESE2 of a bank run on BUFIO clocks, the TDC logic on BUFG clocks
// from the same MMCM, and the phase between the two networks cannot be known
// in advance. As in the paper, a fixed pattern is sent by an OSERDESE2 on the
// BUFG clocks and received by an ISERDESE2 on the BUFIO clock; the BUFG clock
// phase is scanned with the MMCM's dynamic phase shift while received and sent
// words are compared, and the phase is finally set in the middle of the stable
// range between two unstable ones.
//
// Sequence (after start): for each of SCAN_STEPS phase steps (one clock period)
// wait SETTLE_CYC cycles, compare pa_rx with PATTERN for CHECK_CYC cycles and
// record pass/fail; step the phase up by one. Then search the pass map as a
// circle for the longest run of passes, and step the phase back down to the
// middle of that run. locked rises when done; fail instead if no step passed.
// Phase-shift handshake: ps_en is a one-cycle request with ps_incdec giving
// the direction (1 = later); the next request waits for ps_done, as on the
// MMCME2 PSEN/PSINCDEC/PSDONE pins (clocked here by clk, used as PSCLK).
// The pattern, step count, check length and the longest-run rule are this
// design's choices; the paper gives the method only.
module phase_align #(
  parameter int unsigned      PAT_W      = 4,
  parameter logic [PAT_W-1:0] PATTERN    = 4'b0011,
  parameter int unsigned      SCAN_STEPS = 112,
  parameter int unsigned      CHECK_CYC  = 64,
  parameter int unsigned      SETTLE_CYC = 16,
  localparam int unsigned     SW         = $clog2(SCAN_STEPS + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic [PAT_W-1:0] pa_tx,
  input  logic [PAT_W-1:0] pa_rx,
  output logic             ps_en,
  output logic             ps_incdec,
  input  logic             ps_done,
  output logic             busy,
  output logic             locked,
  output logic             fail,
  output logic [SW-1:0]    win_start,
  output logic [SW-1:0]    win_len
);
  typedef enum logic [2:0] {
    S_IDLE, S_SETTLE, S_CHECK, S_STEP, S_ANALYZE, S_MOVE, S_DOWN, S_DONE
  } state_t;

  localparam int unsigned CTW = $clog2((CHECK_CYC > SETTLE_CYC ? CHECK_CYC : SETTLE_CYC) + 1);

  state_t                 state;
  logic [SCAN_STEPS-1:0]  pass_map;
  logic [SW-1:0]          step;        // current phase step index
  logic [CTW-1:0]         cnt;
  logic                   ok;
  logic                   wait_done;
  logic [SW:0]            j;           // analysis index, 0 .. 2*SCAN_STEPS-1
  logic [SW-1:0]          run_start, run_len;
  logic [SW-1:0]          best_start, best_len;
  logic [SW-1:0]          idx;
  logic [SW-1:0]          moves;       // down steps still to do

  assign pa_tx = PATTERN;
  assign busy  = (state != S_IDLE) && (state != S_DONE);
  assign idx   = (j >= (SW+1)'(SCAN_STEPS)) ? SW'(j - (SW+1)'(SCAN_STEPS)) : SW'(j);

  always_ff @(posedge clk) begin
    ps_en <= 1'b0;
    if (rst) begin
      state     <= S_IDLE;
      locked    <= 1'b0;
      fail      <= 1'b0;
      wait_done <= 1'b0;
      ps_incdec <= 1'b0;
      win_start <= '0;
      win_len   <= '0;
      pass_map  <= '0;
      step      <= '0;
      cnt       <= '0;
      ok        <= 1'b0;
      j         <= '0;
      moves     <= '0;
      run_start <= '0;
      run_len   <= '0;
      best_start <= '0;
      best_len  <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state    <= S_SETTLE;
            locked   <= 1'b0;
            fail     <= 1'b0;
            step     <= '0;
            cnt      <= '0;
            pass_map <= '0;
          end
        end
        S_SETTLE: begin
          cnt <= cnt + 1'b1;
          if (cnt == CTW'(SETTLE_CYC - 1)) begin
            state <= S_CHECK;
            cnt   <= '0;
            ok    <= 1'b1;
          end
        end
        S_CHECK: begin
          cnt <= cnt + 1'b1;
          if (pa_rx != PATTERN) ok <= 1'b0;
          if (cnt == CTW'(CHECK_CYC - 1)) begin
            pass_map[step] <= ok && (pa_rx == PATTERN);
            cnt <= '0;
            if (step == SW'(SCAN_STEPS - 1)) begin
              state      <= S_ANALYZE;
              j          <= '0;
              run_len    <= '0;
              run_start  <= '0;
              best_len   <= '0;
              best_start <= '0;
            end else begin
              state     <= S_STEP;
              ps_en     <= 1'b1;
              ps_incdec <= 1'b1;
              wait_done <= 1'b1;
            end
          end
        end
        S_STEP: begin
          if (ps_done) begin
            wait_done <= 1'b0;
            step      <= step + 1'b1;
            state     <= S_SETTLE;
          end
        end
        S_ANALYZE: begin
          // circular longest run of passes, runs capped at one period
          j <= j + 1'b1;
          if (pass_map[idx] && run_len < SW'(SCAN_STEPS)) begin
            if (run_len == '0) run_start <= idx;
            run_len <= run_len + 1'b1;
            if (run_len + 1'b1 > best_len) begin
              best_len   <= run_len + 1'b1;
              best_start <= (run_len == '0) ? idx : run_start;
            end
          end else begin
            run_len <= '0;
          end
          if (j == (SW+1)'(2 * SCAN_STEPS - 1)) begin
            state <= S_MOVE;  // best_* are final when S_MOVE reads them
          end
        end
        S_MOVE: begin
          if (best_len == '0) begin
            fail  <= 1'b1;
            state <= S_DONE;
          end else begin
            win_start <= best_start;
            win_len   <= best_len;
            // the phase sits at step N-1; the target is below or at it
            moves     <= SW'(SCAN_STEPS - 1) - target(best_start, best_len);
            state     <= S_DOWN;
          end
        end
        S_DOWN: begin
          if (moves == '0) begin
            locked <= 1'b1;
            state  <= S_DONE;
          end else if (!wait_done) begin
            ps_en     <= 1'b1;
            ps_incdec <= 1'b0;
            wait_done <= 1'b1;
          end else if (ps_done) begin
            wait_done <= 1'b0;
            moves     <= moves - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Middle of a window of passes, wrapped into 0 .. SCAN_STEPS-1.
  function automatic logic [SW-1:0] target(input logic [SW-1:0] st, input logic [SW-1:0] len);
    logic [SW:0] t;
    t = (SW+1)'(st) + (SW+1)'(len >> 1);
    if (t >= (SW+1)'(SCAN_STEPS)) t = t - (SW+1)'(SCAN_STEPS);
    return SW'(t);
  endfunction

  // A phase-step request may not be issued while the previous one is pending.
  a_ps_handshake: assert property (@(posedge clk) disable iff (rst)
    ps_en |=> !ps_en until_with ps_done)
    else $error("phase_align: ps_en while a step is pending");
endmodule
