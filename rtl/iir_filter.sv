// iir_filter -- first-order low-pass (exponential average) on the SUM4 stream.
//
// The paper passes the 100 MHz sums through an infinite impulse response
// filter before a decision is taken, to average out TDC noise and jitter, but
// does not give the filter. This design uses the simplest one that needs no
// multiplier:   y[n] = y[n-1] + (x[n] - y[n-1]) * 2^-SHIFT.
// The state is kept scaled by 2^SHIFT, so that with Y = y * 2^SHIFT the update
// is   Y <= Y + x - (Y >> SHIFT)   and no fraction is lost. In steady state
// Y = x * 2^SHIFT. With SHIFT = 4 the time constant is 16 samples, i.e. the 64
// TDC measurements the paper averages per decision.
//
// Interface: x is read every clk cycle; y is the scaled state (unsigned,
// SUM_W + SHIFT bits), updated one cycle after x. Reset clears the state.
module iir_filter #(
  parameter int unsigned SUM_W  = 8,
  parameter int unsigned SHIFT  = stab_pkg::IIR_SHIFT,
  parameter int unsigned FILT_W = SUM_W + SHIFT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SUM_W-1:0]  x,
  output logic [FILT_W-1:0] y
);

  // Y - (Y >> SHIFT) never underflows, and Y + x - (Y >> SHIFT) never exceeds
  // (2^SUM_W - 1) * 2^SHIFT, so FILT_W bits hold every intermediate value.
  logic [FILT_W-1:0] next;

  always_comb next = y - (y >> SHIFT) + FILT_W'(x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else        y <= next;
  end

endmodule
