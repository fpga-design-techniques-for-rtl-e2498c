// uart_host -- testbench model of the host end of the serial link: sends a
// byte as an 8N1 frame and receives the reply, with its own bit timing.
module uart_host #(
  parameter realtime BIT_PS = 160000.0   // bit period in ps
) (
  output logic rx_line,   // to the design's receive input
  input  logic tx_line    // from the design's transmit output
);
  timeunit 1ps;
  timeprecision 1fs;

  initial rx_line = 1'b1;

  task automatic send(input logic [7:0] b);
    rx_line = 1'b0;
    #(BIT_PS);
    for (int i = 0; i < 8; i++) begin
      rx_line = b[i];
      #(BIT_PS);
    end
    rx_line = 1'b1;
    #(BIT_PS);
  endtask

  // Waits up to timeout_ps for a start bit; returns ok = 0 if none came.
  task automatic receive(output logic [7:0] b, output bit ok, input realtime timeout_ps);
    realtime t0 = $realtime;
    ok = 1'b0;
    b  = '0;
    while (tx_line && ($realtime - t0 < timeout_ps)) #(BIT_PS / 16.0);
    if (tx_line) return;
    #(BIT_PS * 1.5);
    for (int i = 0; i < 8; i++) begin
      b[i] = tx_line;
      #(BIT_PS);
    end
    ok = tx_line;   // stop bit
    #(BIT_PS / 2.0);
  endtask
endmodule
