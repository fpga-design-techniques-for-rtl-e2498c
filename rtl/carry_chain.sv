// carry_chain -- behavioural model of an FPGA carry-chain delay line.
//
// This is a behavioural model, not synthesizable logic: on the FPGA the chain
// is a column of dedicated carry primitives whose propagation delay depends on
// the core supply voltage, and that dependence is the whole point of the
// stabilizer. Here every element is a transport delay of delay_fs femtoseconds,
// taken from an input so that a testbench (or a supply model) can slow the
// chain down or speed it up while it runs.
//
// The design uses the chain twice: as the dummy elements that lengthen the
// path of the reference clock (the paper adds them to calibrate the clock
// delay and to make the TDC more sensitive to voltage), and as the tapped line
// the TDC samples. The element count is this design's choice; the paper gives
// none.
//
// Interface: d_in enters element 0; taps[i] is the output of element i, so
// taps[i] follows d_in after (i+1)*delay_fs. No clock.
module carry_chain #(
  parameter int unsigned N = 32  // number of carry elements
) (
  input  logic         d_in,
  input  logic [19:0]  delay_fs,   // delay of one element, femtoseconds
  output logic [N-1:0] taps
);
  timeunit 1ps;
  timeprecision 1fs;

  for (genvar i = 0; i < N; i++) begin : g_el
    logic q;
    logic prev;
    if (i == 0) begin : g_first
      assign prev = d_in;
    end else begin : g_next
      assign prev = g_el[i-1].q;
    end
    // Transport delay: every edge arrives, however close the next one follows.
    // The element is evaluated once at time zero as well, so that a chain
    // that starts from arbitrary values settles to its input.
    always begin
      q <= #(real'(delay_fs) / 1000.0) prev;
      @(prev);
    end
    assign taps[i] = q;
  end

endmodule
