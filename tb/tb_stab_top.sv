// tb_stab_top -- end-to-end test of the stabilizer in closed loop with a model
// of the cabled supply (supply_model). Runs: start-up calibration, settling
// with all oscillators available, a 150 mW load step (0.25 W -> 0.4 W, as the
// converter starting in the paper) that the loop must compensate by shedding
// about 300 oscillators, host reads, switching the stabilizer off and on, the
// load step going away again, and a recalibration from the host. Each
// mechanism is counted and must occur at least once.
// Parameters: UART at 16 clocks per bit; everything else at its default.
module tb_stab_top;
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

  stab_top #(.CLKS_PER_BIT(16)) dut (
    .clk_sys, .clk_tdc, .clk_ref(clk_tdc), .rst_n, .host_rx, .host_tx, .carry_delay_fs,
    .osc_en, .osc_out, .tdc_code, .tdc_filt, .tdc_sum, .decide_strobe, .inc, .dec,
    .io_tap, .status
  );
  supply_model u_supply (.main_uw, .n_running, .carry_delay_fs, .v_fpga);
  uart_host #(.BIT_PS(160000.0)) host (.rx_line(host_rx), .tx_line(host_tx));

  assign n_running = $countones(osc_en);

  initial begin
    #1250;
    forever begin clk_tdc = 1'b1; #1250; clk_tdc = 1'b0; #1250; end
  end
  initial begin
    #1250;
    forever begin clk_sys = 1'b1; #5000; clk_sys = 1'b0; #5000; end
  end

  // ---- mechanism counters ---------------------------------------------------
  int n_cal_step = 0, n_inc = 0, n_dec = 0, n_off = 0, n_on = 0, n_recal = 0;
  int n_reads = 0, n_step_comp = 0, n_release_comp = 0, n_decisions = 0;
  logic [4:0] last_tap = '0;
  int osc_toggles = 0;

  always @(posedge clk_sys) if (rst_n) begin
    n_inc       += int'(inc);
    n_dec       += int'(dec);
    n_decisions += int'(decide_strobe);
    if (io_tap == last_tap + 5'd1) n_cal_step++;
    last_tap = io_tap;
  end
  always @(osc_out) osc_toggles++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic host_cmd(input logic [7:0] cmd, output logic [7:0] reply);
    bit ok;
    fork
      host.send(cmd);
      host.receive(reply, ok, 10000000.0);
    join
    check(ok, $sformatf("no reply to command %h", cmd));
    n_reads++;
  endtask

  task automatic wait_us(input int us);
    #(real'(us) * 1.0e6);
  endtask

  // Average the TDC filter over 2 us.
  task automatic avg_filt(output real avg);
    real acc = 0.0;
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
    real avg;
    int n_before, n_after, n_off_state, t0;
    #21350 rst_n = 1'b1;

    // 1. start-up calibration
    t0 = int'($realtime / 1000.0);
    wait (status.cal_done && status.running);
    $display("calibrated to IO delay tap %0d after %0d ns, carry delay %0d fs, V = %.3f",
             io_tap, int'($realtime / 1000.0) - t0, carry_delay_fs, v_fpga);
    check(!status.cal_error, "calibration failed");

    // 2. settle with the base load
    wait_us(20);
    avg_filt(avg);
    n_before = n_running;
    $display("idle: %0d oscillators, filter %.1f (set point 1024), V = %.4f", n_before, avg, v_fpga);
    check(avg > 1024.0 - 64.0 && avg < 1024.0 + 64.0, "TDC not held at mid-range before the step");

    // 3. load step: the circuit starts converting
    main_uw = 400000;
    wait_us(30);
    avg_filt(avg);
    n_after = n_running;
    $display("loaded: %0d oscillators, filter %.1f, V = %.4f", n_after, avg, v_fpga);
    check(avg > 1024.0 - 64.0 && avg < 1024.0 + 64.0, "TDC not back at mid-range after the step");
    // 150 mW at 0.5 mW per oscillator: about 300 fewer, in steps of four
    check(n_before - n_after >= 280 && n_before - n_after <= 320,
          $sformatf("shed %0d oscillators, expected about 300", n_before - n_after));
    if (n_before - n_after >= 280) n_step_comp++;
    check(n_after % 4 == 0, "farms out of step with each other");

    // 4. host reads
    host_cmd(CMD_COUNT, r);
    check(int'(r) == n_running / 4, $sformatf("count read %0d, expected %0d", r, n_running / 4));
    host_cmd(CMD_TAP, r);
    check(r == 8'(io_tap), "tap read wrong");
    host_cmd(CMD_TDC, r);
    check(r >= 8'd56 && r <= 8'd72, $sformatf("TDC read %0d, expected near 64", r));
    host_cmd(CMD_STATUS, r);
    check(r == {4'b0111, 4'(ST_RUN)}, $sformatf("status read %b", r));

    // 5. stabilizer off: all oscillators stop, the TDC drifts low (fast logic)
    host_cmd(CMD_OFF, r);
    check(r == CMD_OFF, "off not acknowledged");
    n_off++;
    wait_us(5);
    osc_toggles = 0;
    wait_us(2);
    n_off_state = n_running;
    avg_filt(avg);
    $display("off: %0d oscillators, filter %.1f, V = %.4f", n_off_state, avg, v_fpga);
    check(n_off_state == 0 && osc_toggles == 0 && !status.running, "oscillators still running when off");
    check(avg < 1024.0 - 128.0, "TDC did not move when the stabilizer was switched off");

    // 6. back on: the loop sheds oscillators again down to the loaded level
    host_cmd(CMD_ON, r);
    check(r == CMD_ON, "on not acknowledged");
    n_on++;
    wait_us(30);
    avg_filt(avg);
    $display("on again: %0d oscillators, filter %.1f", n_running, avg);
    check(n_running >= n_after - 12 && n_running <= n_after + 12, "did not return to the loaded level");
    check(osc_toggles > 0, "oscillators never toggled");

    // 7. load released: the loop switches oscillators back on
    main_uw = 250000;
    wait_us(30);
    avg_filt(avg);
    $display("released: %0d oscillators, filter %.1f", n_running, avg);
    // back up by about the 300 shed at the step (the idle level may sit at the
    // farm's limit, so the approach to it is slow)
    check(n_running >= n_after + 280 && n_running <= n_before, "did not return towards the idle level");
    if (n_running - n_after >= 280) n_release_comp++;

    // 8. recalibration from the host
    host_cmd(CMD_CAL, r);
    check(r == CMD_CAL, "recalibrate not acknowledged");
    wait (!status.cal_done);
    wait (status.cal_done && status.running);
    n_recal++;
    check(!status.cal_error, "recalibration failed");

    $display("mechanisms: cal steps %0d, decisions %0d, inc %0d, dec %0d, step compensated %0d, release compensated %0d, off %0d, on %0d, recal %0d, host transactions %0d",
             n_cal_step, n_decisions, n_inc, n_dec, n_step_comp, n_release_comp, n_off, n_on, n_recal, n_reads);
    check(n_cal_step > 0, "no calibration step");
    check(n_inc > 0, "no inc decision");
    check(n_dec > 0, "no dec decision");
    check(n_step_comp > 0, "load step never compensated");
    check(n_release_comp > 0, "load release never compensated");
    check(n_off > 0 && n_on > 0, "stabilizer never switched");
    check(n_recal > 0, "no recalibration");
    check(n_reads > 0, "no host transaction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
