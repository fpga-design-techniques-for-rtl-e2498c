// io_delay -- behavioural model of a tap-programmable IO delay element.
//
// This is a behavioural model, not synthesizable logic: on the FPGA it is the
// IO bank's delay primitive (IDELAY). Its taps are calibrated by the vendor's
// delay controller against a reference clock and it is powered from the IO
// supply, so its delay does not move with the core voltage. That is why the
// stabilizer can use it as the fixed part of the reference-clock path.
//
// The paper only says the IO delay shifts the clock edge into the middle of the
// TDC range at start-up. The tap count (32) and tap size (78.125 ps) are those
// of a common FPGA IDELAY run from a 200 MHz reference; the fixed insertion
// delay is this design's choice.
//
// Interface: d_out follows d_in after BASE_FS + tap * TAP_FS femtoseconds
// (transport delay). tap may change at any time.
module io_delay #(
  parameter int unsigned TAP_BITS = 5,        // 32 taps
  parameter int unsigned TAP_FS   = 78125,    // delay per tap, femtoseconds
  parameter int unsigned BASE_FS  = 600000    // insertion delay at tap 0, femtoseconds
) (
  input  logic                d_in,
  input  logic [TAP_BITS-1:0] tap,
  output logic                d_out
);
  timeunit 1ps;
  timeprecision 1fs;

  // Evaluated at time zero as well, so the output starts consistent with the input.
  always begin
    d_out <= #((real'(BASE_FS) + real'(tap) * real'(TAP_FS)) / 1000.0) d_in;
    @(d_in);
  end

endmodule
