// serial_comm -- host link of the stabilizer: a UART and a one-byte protocol.
//
// The paper's architecture figure connects a "serial communication" block
// between the host and the controller but says nothing more about it. This
// design gives it the simplest useful form: an 8N1 UART and single-byte
// commands, each answered with one byte.
//   'E' stabilizer on      -> echoes 'E'      'D' stabilizer off -> echoes 'D'
//   'C' recalibrate        -> echoes 'C'      'N' -> oscillators running per farm
//   'T' -> filtered TDC value, integer part (sum of four codes; mid-range = 2*TAPS)
//   'I' -> IO delay tap                       'S' -> status byte (stab_status_t)
//   anything else -> '?'
// On/off/calibrate leave as single-cycle pulses on the cycle after the byte is
// received. A command that arrives while the previous reply is still being
// sent is dropped.
//
// Interface: rx/tx serial lines; everything else in clk.
module serial_comm
  import stab_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rx,
  output logic         tx,
  output logic         cmd_on,
  output logic         cmd_off,
  output logic         cmd_cal,
  input  logic [7:0]   osc_count,
  input  logic [7:0]   tdc_value,
  input  logic [7:0]   io_tap,
  input  stab_status_t status
);

  logic [7:0] rx_data;
  logic       rx_valid;
  logic [7:0] reply;
  logic       send, busy;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx, .data(rx_data), .valid(rx_valid)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data(reply), .start(send), .busy, .tx
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_on  <= 1'b0;
      cmd_off <= 1'b0;
      cmd_cal <= 1'b0;
      send    <= 1'b0;
      reply   <= '0;
    end else begin
      cmd_on  <= 1'b0;
      cmd_off <= 1'b0;
      cmd_cal <= 1'b0;
      send    <= 1'b0;
      if (rx_valid && !busy && !send) begin
        send <= 1'b1;
        case (rx_data)
          CMD_ON:     begin cmd_on  <= 1'b1; reply <= rx_data; end
          CMD_OFF:    begin cmd_off <= 1'b1; reply <= rx_data; end
          CMD_CAL:    begin cmd_cal <= 1'b1; reply <= rx_data; end
          CMD_COUNT:  reply <= osc_count;
          CMD_TDC:    reply <= tdc_value;
          CMD_TAP:    reply <= io_tap;
          CMD_STATUS: reply <= status;
          default:    reply <= REPLY_UNKNOWN;
        endcase
      end
    end
  end

endmodule
