// decision_maker -- SUM4, IIR filter and decision stage of the stabilizer.
//
// The chain drawn in the paper's detail figure: TDC codes arrive at 400 MHz,
// groups of four are added and handed to the 100 MHz domain (sum4), the
// resulting stream is low-pass filtered (iir_filter), and every 16 system
// cycles -- 64 TDC measurements, 6.25 MHz -- a decision is taken to switch one
// oscillator per farm on (inc) or off (dec) (decide). The filtered value is
// also brought out; the controller uses it to calibrate the IO delay.
//
// Interface: code in the clk_tdc domain; everything else in clk_sys. inc/dec
// are single-cycle pulses, only while enable is high. Latency from a TDC
// snapshot to the filter: about two system cycles.
module decision_maker #(
  parameter int unsigned TAPS     = stab_pkg::TDC_TAPS,
  parameter int unsigned CODE_W   = $clog2(TAPS + 1),
  parameter int unsigned SHIFT    = stab_pkg::IIR_SHIFT,
  parameter int unsigned SUM_W    = CODE_W + $clog2(stab_pkg::N_SUM),
  parameter int unsigned FILT_W   = SUM_W + SHIFT,
  parameter int unsigned DEADBAND = 0
) (
  input  logic              clk_tdc,
  input  logic              clk_sys,
  input  logic              rst_n,
  input  logic [CODE_W-1:0] code,
  input  logic              enable,
  output logic [SUM_W-1:0]  sum,
  output logic [FILT_W-1:0] filt,
  output logic              strobe,
  output logic              inc,
  output logic              dec
);

  localparam int unsigned SETPOINT = (stab_pkg::N_SUM * TAPS / 2) << SHIFT;

  sum4 #(.CODE_W(CODE_W), .N(stab_pkg::N_SUM), .SUM_W(SUM_W)) u_sum4 (
    .clk_tdc, .clk_sys, .rst_n, .code, .sum
  );

  iir_filter #(.SUM_W(SUM_W), .SHIFT(SHIFT), .FILT_W(FILT_W)) u_iir (
    .clk(clk_sys), .rst_n, .x(sum), .y(filt)
  );

  decide #(
    .FILT_W(FILT_W),
    .DECIDE_EVERY(stab_pkg::MEAS_PER_DECIDE / stab_pkg::N_SUM),
    .SETPOINT(SETPOINT),
    .DEADBAND(DEADBAND)
  ) u_decide (
    .clk(clk_sys), .rst_n, .enable, .filt, .strobe, .inc, .dec
  );

endmodule
