// decide -- turns the filtered TDC value into increment/decrement commands.
//
// Every DECIDE_EVERY system cycles (16 at 100 MHz, i.e. the paper's 6.25 MHz
// decision rate, one decision per 64 TDC measurements) the filtered value is
// compared with the set point, the middle of the TDC range. A value below it
// means the logic is fast (light load, little IR drop), so one more oscillator
// per farm is switched on (inc). A value above it means the logic is slow, so
// one is switched off (dec). This direction follows the paper. The optional
// dead band, the comparison itself and the pulse encoding are this design's
// choices; by default the dead band is zero and an exact match does nothing.
//
// Interface: filt is read on the decision cycle; strobe, inc and dec are
// single-cycle pulses on that cycle's following edge. inc and dec are never
// high together and stay low while enable is low (strobe still pulses).
module decide #(
  parameter int unsigned FILT_W       = 12,
  parameter int unsigned DECIDE_EVERY = stab_pkg::MEAS_PER_DECIDE / stab_pkg::N_SUM,
  parameter int unsigned SETPOINT     = (stab_pkg::N_SUM * stab_pkg::TDC_TAPS / 2) << stab_pkg::IIR_SHIFT,
  parameter int unsigned DEADBAND     = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [FILT_W-1:0] filt,
  output logic              strobe,
  output logic              inc,
  output logic              dec
);

  localparam int unsigned CNT_W = (DECIDE_EVERY > 1) ? $clog2(DECIDE_EVERY) : 1;
  localparam logic [FILT_W:0] LO = (FILT_W + 1)'(SETPOINT) - (FILT_W + 1)'(DEADBAND);
  localparam logic [FILT_W:0] HI = (FILT_W + 1)'(SETPOINT) + (FILT_W + 1)'(DEADBAND);

  logic [CNT_W-1:0] cnt;
  logic             tick;

  assign tick = (cnt == CNT_W'(DECIDE_EVERY - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      strobe <= 1'b0;
      inc    <= 1'b0;
      dec    <= 1'b0;
    end else begin
      cnt    <= tick ? '0 : cnt + 1'b1;
      strobe <= tick;
      inc    <= tick && enable && ({1'b0, filt} < LO);
      dec    <= tick && enable && ({1'b0, filt} > HI);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(inc && dec));

endmodule
