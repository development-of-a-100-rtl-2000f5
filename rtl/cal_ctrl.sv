// cal_ctrl: control of the TDC calibration set-up.
//
// For calibration the board's crosspoint switch routes every TDC channel to the
// FPGA pulser, whose MMCM takes either the White Rabbit clock (pulses
// synchronous to the TDC) or a free-running oscillator (asynchronous pulses for
// the code density test), and whose phase is moved in 12.5 ps steps for the
// synchronous time scan. This block holds those settings and carries out the
// phase moves. The paper names the block (CTRL) and what it drives; the command
// interface is this design's choice.
// Interface: when cmd_valid is high, cmd_sel_async, cmd_xpoint_cal and
// cmd_pulser_en are latched, and the pulser phase is moved by cmd_steps MMCM
// steps (up if cmd_up). cmd_ready is low while steps are in progress. Each step
// is one ps_en pulse followed by waiting for ps_done. phase is the signed sum
// of steps done so far.
module cal_ctrl #(
  parameter int unsigned STEP_W = 10
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_sel_async,
  input  logic              cmd_xpoint_cal,
  input  logic              cmd_pulser_en,
  input  logic              cmd_up,
  input  logic [STEP_W-1:0] cmd_steps,
  output logic              sel_async,
  output logic              xpoint_cal,
  output logic              pulser_en,
  output logic              ps_en,
  output logic              ps_incdec,
  input  logic              ps_done,
  output logic signed [15:0] phase
);
  logic [STEP_W-1:0] left;
  logic              pending;

  assign cmd_ready = (left == '0) && !pending;

  always_ff @(posedge clk) begin
    ps_en <= 1'b0;
    if (rst) begin
      sel_async  <= 1'b0;
      xpoint_cal <= 1'b0;
      pulser_en  <= 1'b0;
      ps_incdec  <= 1'b0;
      left       <= '0;
      pending    <= 1'b0;
      phase      <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        sel_async  <= cmd_sel_async;
        xpoint_cal <= cmd_xpoint_cal;
        pulser_en  <= cmd_pulser_en;
        ps_incdec  <= cmd_up;
        left       <= cmd_steps;
      end else if (pending) begin
        if (ps_done) begin
          pending <= 1'b0;
          phase   <= ps_incdec ? phase + 16'sd1 : phase - 16'sd1;
        end
      end else if (left != '0) begin
        ps_en   <= 1'b1;
        pending <= 1'b1;
        left    <= left - 1'b1;
      end
    end
  end

  a_ps_handshake: assert property (@(posedge clk) disable iff (rst)
    ps_en |=> !ps_en until_with ps_done)
    else $error("cal_ctrl: ps_en while a step is pending");
endmodule
