// tb_serial_comm -- checks the host link at 16 clocks per bit: each command
// byte gives the right one-cycle pulse and reply, reads return the status
// inputs, an unknown byte gives '?'.
module tb_serial_comm;
  timeunit 1ps;
  timeprecision 1fs;
  import stab_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rx, tx;
  logic cmd_on, cmd_off, cmd_cal;
  logic [7:0] osc_count = 8'd77, tdc_value = 8'd64, io_tap = 8'd9;
  stab_status_t status = '{cal_error: 1'b0, cal_done: 1'b1, running: 1'b1, enabled: 1'b1, state: 4'd4};
  int n_on = 0, n_off = 0, n_cal = 0;

  serial_comm #(.CLKS_PER_BIT(16)) dut (
    .clk, .rst_n, .rx, .tx, .cmd_on, .cmd_off, .cmd_cal,
    .osc_count, .tdc_value, .io_tap, .status
  );
  uart_host #(.BIT_PS(160000.0)) host (.rx_line(rx), .tx_line(tx));

  always #5000 clk = ~clk;
  always @(posedge clk) begin
    n_on  += int'(cmd_on);
    n_off += int'(cmd_off);
    n_cal += int'(cmd_cal);
  end

  task automatic transact(input logic [7:0] cmd, input logic [7:0] want,
                          input int won, input int woff, input int wcal);
    logic [7:0] got;
    bit ok;
    int on0 = n_on, off0 = n_off, cal0 = n_cal;
    fork
      host.send(cmd);
      host.receive(got, ok, 5000000.0);
    join
    checks++;
    if (!ok || got != want) begin
      failures++;
      $display("FAIL command %h: reply %h (ok=%b), expected %h", cmd, got, ok, want);
    end
    checks++;
    if (n_on - on0 != won || n_off - off0 != woff || n_cal - cal0 != wcal) begin
      failures++;
      $display("FAIL command %h: pulses on/off/cal %0d/%0d/%0d", cmd, n_on - on0, n_off - off0, n_cal - cal0);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12000 rst_n = 1'b1;
    #100000;
    transact(CMD_ON,     8'h45, 1, 0, 0);
    transact(CMD_OFF,    8'h44, 0, 1, 0);
    transact(CMD_CAL,    8'h43, 0, 0, 1);
    transact(CMD_COUNT,  8'd77, 0, 0, 0);
    transact(CMD_TDC,    8'd64, 0, 0, 0);
    transact(CMD_TAP,    8'd9,  0, 0, 0);
    transact(CMD_STATUS, 8'b0111_0100, 0, 0, 0);
    transact(8'h00,      8'h3F, 0, 0, 0);
    osc_count = 8'd128; tdc_value = 8'd3; io_tap = 8'd31;
    status = '{cal_error: 1'b1, cal_done: 1'b1, running: 1'b0, enabled: 1'b0, state: 4'd5};
    transact(CMD_COUNT,  8'd128, 0, 0, 0);
    transact(CMD_TDC,    8'd3,   0, 0, 0);
    transact(CMD_TAP,    8'd31,  0, 0, 0);
    transact(CMD_STATUS, 8'b1100_0101, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
