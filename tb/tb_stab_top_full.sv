// tb_stab_top_full -- one complete operation of the stabilizer at its real
// size and default parameters: 512 oscillators, 32-tap TDC, 40 dummies, and
// the host link at its real 115200 baud (868 clocks of 100 MHz per bit).
// Sequence: reset, start-up calibration of the IO delay, regulation with the
// base load (0.25 W), the 150 mW load step of the converter starting
// (0.4 W), compensated by the loop, and one host read of the oscillator
// count over the serial link while the loop keeps regulating.
// The supply, cable and load are the behavioural supply_model.
module tb_stab_top_full;
  timeunit 1ps;
  timeprecision 1fs;
  import stab_pkg::*;

  localparam int NOSC = N_FARMS * OSC_PER_FARM;
  int checks = 0, failures = 0;

  logic clk_sys = 1'b0, clk_tdc = 1'b0, rst_n = 1'b0;
  logic host_rx, host_tx;
  logic [19:0] carry_delay_fs;
  logic [NOSC-1:0] osc_en, osc_out;
  logic [5:0]  tdc_code;
  logic [11:0] tdc_filt;
  logic [7:0]  tdc_sum;
  logic decide_strobe, inc, dec;
  logic [4:0] io_tap;
  stab_status_t status;

  int unsigned main_uw = 250000;
  int unsigned n_running;
  real v_fpga;

  stab_top dut (
    .clk_sys, .clk_tdc, .clk_ref(clk_tdc), .rst_n, .host_rx, .host_tx, .carry_delay_fs,
    .osc_en, .osc_out, .tdc_code, .tdc_filt, .tdc_sum, .decide_strobe, .inc, .dec,
    .io_tap, .status
  );
  supply_model u_supply (.main_uw, .n_running, .carry_delay_fs, .v_fpga);
  // 868 clocks of 10 ns per bit
  uart_host #(.BIT_PS(8680000.0)) host (.rx_line(host_rx), .tx_line(host_tx));

  assign n_running = $countones(osc_en);

  initial begin
    #1250;
    forever begin clk_tdc = 1'b1; #1250; clk_tdc = 1'b0; #1250; end
  end
  initial begin
    #1250;
    forever begin clk_sys = 1'b1; #5000; clk_sys = 1'b0; #5000; end
  end

  int n_inc = 0, n_dec = 0;
  always @(posedge clk_sys) if (rst_n) begin
    n_inc += int'(inc);
    n_dec += int'(dec);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic avg_filt(output real avg);
    real acc;
    acc = 0.0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk_sys);
      acc += real'(tdc_filt);
    end
    avg = acc / 200.0;
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] r;
    bit ok;
    real avg;
    int n_before, n_after;
    #21350 rst_n = 1'b1;

    wait (status.cal_done && status.running);
    $display("calibrated to IO delay tap %0d at %0d ns", io_tap, int'($realtime / 1000.0));
    check(!status.cal_error, "calibration failed");

    #20000000;
    avg_filt(avg);
    n_before = n_running;
    $display("idle: %0d oscillators, filter %.1f", n_before, avg);
    check(avg > 960.0 && avg < 1088.0, "TDC not held at mid-range before the step");

    main_uw = 400000;
    #30000000;
    avg_filt(avg);
    n_after = n_running;
    $display("loaded: %0d oscillators, filter %.1f", n_after, avg);
    check(avg > 960.0 && avg < 1088.0, "TDC not back at mid-range after the step");
    check(n_before - n_after >= 280 && n_before - n_after <= 320,
          $sformatf("shed %0d oscillators, expected about 300", n_before - n_after));

    fork
      host.send(CMD_COUNT);
      host.receive(r, ok, 400000000.0);
    join
    check(ok, "no reply from the host link");
    check(int'(r) >= n_running / 4 - 2 && int'(r) <= n_running / 4 + 2,
          $sformatf("count read %0d, expected %0d", r, n_running / 4));
    check(n_inc > 0 || n_dec > 0, "loop never decided");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
