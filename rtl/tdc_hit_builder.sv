// tdc_hit_builder: one TDC channel's hit from the edges of its four lines.
//
// The four lines see the same pulse through delays about 100 ps apart, so each
// reports the edge in 400 ps units, rounded to its own sampling grid. The sum
// of the four line times is the edge time in 100 ps units (the paper's plot of
// the four line times and their mean). Leading edge and falling edge are
// summed separately; time over threshold (ToT) is their difference.
//
// Sequence: IDLE -> COLLECT on the first rising edge of any line. All four
// lines must report a rising edge within EDGE_WIN vectors, and all four a
// falling edge before MAX_TOT_CYC vectors have passed; otherwise the hit is
// dropped and err_miss pulses. A complete hit gives hit_valid for one cycle,
// then the channel ignores new edges for VETO_CYC vectors (32 ns in the paper,
// against comparator oscillation after the falling edge); each rising edge
// ignored then pulses vetoed.
// The sums are formed relative to line 0, so a coarse-counter wrap inside a
// hit does not disturb them. The window, timeout and dropping rule are this
// design's choices.
// Timing: hit_valid two cycles after the last line's falling-edge strobe.
module tdc_hit_builder
  import tdc_pkg::LINES;
#(
  parameter int unsigned CW          = 32,
  parameter int unsigned VETO_CYC    = 10,
  parameter int unsigned EDGE_WIN    = 3,
  parameter int unsigned MAX_TOT_CYC = 1024,
  parameter int unsigned TOT_W       = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [LINES-1:0]     rise,
  input  logic [CW+2:0]        rise_ts [LINES],
  input  logic [LINES-1:0]     fall,
  input  logic [CW+2:0]        fall_ts [LINES],
  input  logic [LINES-1:0]     fall_after_rise,
  output logic                 hit_valid,
  output logic [CW+4:0]        hit_time,
  output logic [TOT_W-1:0]     hit_tot,
  output logic                 err_miss,
  output logic                 vetoed
);
  typedef enum logic [1:0] {S_IDLE, S_COLLECT, S_VETO} state_t;

  state_t               state;
  logic [LINES-1:0]     got_r, got_f;
  logic [CW+2:0]        ts_r [LINES];
  logic [CW+2:0]        ts_f [LINES];
  logic [$clog2(MAX_TOT_CYC+1)-1:0] timer;
  logic [$clog2(VETO_CYC+1)-1:0]    veto_cnt;

  logic [CW+4:0] sum_r, sum_f, dur;

  // Sum of the four line times, relative to line 0.
  always_comb begin
    sum_r = {ts_r[0], 2'b00};
    sum_f = {ts_f[0], 2'b00};
    for (int i = 1; i < LINES; i++) begin
      sum_r = sum_r + (CW+5)'(signed'(ts_r[i] - ts_r[0]));
      sum_f = sum_f + (CW+5)'(signed'(ts_f[i] - ts_f[0]));
    end
    dur = sum_f - sum_r;  // modulo 2^(CW+5), like the times
  end

  always_ff @(posedge clk) begin
    hit_valid <= 1'b0;
    err_miss  <= 1'b0;
    vetoed    <= 1'b0;
    if (rst) begin
      state    <= S_IDLE;
      got_r    <= '0;
      got_f    <= '0;
      timer    <= '0;
      veto_cnt <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          got_r <= '0;
          got_f <= '0;
          timer <= '0;
          if (|rise) begin
            state <= S_COLLECT;
            for (int i = 0; i < LINES; i++) begin
              if (rise[i]) begin
                got_r[i] <= 1'b1;
                ts_r[i]  <= rise_ts[i];
                if (fall_after_rise[i]) begin
                  got_f[i] <= 1'b1;
                  ts_f[i]  <= fall_ts[i];
                end
              end
            end
          end
        end
        S_COLLECT: begin
          timer <= timer + 1'b1;
          for (int i = 0; i < LINES; i++) begin
            if (!got_r[i] && rise[i]) begin
              got_r[i] <= 1'b1;
              ts_r[i]  <= rise_ts[i];
              if (fall_after_rise[i]) begin
                got_f[i] <= 1'b1;
                ts_f[i]  <= fall_ts[i];
              end
            end else if (got_r[i] && !got_f[i] && fall[i]) begin
              got_f[i] <= 1'b1;
              ts_f[i]  <= fall_ts[i];
            end
          end
          if (&got_r && &got_f) begin
            hit_valid <= 1'b1;
            hit_time  <= sum_r;
            hit_tot   <= TOT_W'(dur);
            state     <= S_VETO;
            veto_cnt  <= ($clog2(VETO_CYC+1))'(VETO_CYC);
          end else if ((!(&got_r) && timer >= ($clog2(MAX_TOT_CYC+1))'(EDGE_WIN)) ||
                       timer >= ($clog2(MAX_TOT_CYC+1))'(MAX_TOT_CYC)) begin
            err_miss <= 1'b1;
            state    <= S_VETO;
            veto_cnt <= ($clog2(VETO_CYC+1))'(VETO_CYC);
          end
        end
        default: begin  // S_VETO
          if (|rise) vetoed <= 1'b1;
          if (veto_cnt <= 1) state <= S_IDLE;
          else               veto_cnt <= veto_cnt - 1'b1;
        end
      endcase
    end
  end

  initial assert (EDGE_WIN < MAX_TOT_CYC) else $error("EDGE_WIN must be below MAX_TOT_CYC");
endmodule
