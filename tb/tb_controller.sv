// tb_controller -- checks start-up calibration and host control. The
// filtered TDC value is modelled as 100 * (tap + 1), so the search must stop
// at the first tap where that reaches the set point 1024 (tap 10) after
// 11 settling waits; an unreachable set point must end at tap 31 with
// cal_error. Then off, on and recalibrate are exercised.
module tb_controller;
  timeunit 1ps;
  timeprecision 1fs;
  import stab_pkg::*;

  localparam int SETTLE = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [11:0] filt;
  logic cmd_on = 0, cmd_off = 0, cmd_cal = 0;
  logic [4:0] io_tap;
  logic run, farm_load;
  logic [7:0] farm_count;
  stab_status_t status;
  int slope = 100;
  int loads [$];
  int cycle = 0;

  controller #(.SETTLE(SETTLE)) dut (
    .clk, .rst_n, .filt, .cmd_on, .cmd_off, .cmd_cal,
    .io_tap, .run, .farm_load, .farm_count, .status
  );

  always #5000 clk = ~clk;
  always_comb filt = 12'(slope * (int'(io_tap) + 1));
  always @(posedge clk) begin
    cycle++;
    if (farm_load) loads.push_back(int'(farm_count));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic command(input int which);
    @(negedge clk);
    cmd_on = (which == 0); cmd_off = (which == 1); cmd_cal = (which == 2);
    @(negedge clk);
    cmd_on = 0; cmd_off = 0; cmd_cal = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic wait_cal(output int cycles);
    int c0 = cycle;
    while (!status.cal_done || !(run || status.state == 4'(ST_OFF))) @(negedge clk);
    cycles = cycle - c0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    #12000 rst_n = 1'b1;
    wait_cal(cyc);
    check(io_tap == 5'd10, $sformatf("calibrated tap %0d, expected 10", io_tap));
    check(run && status.running && status.enabled && !status.cal_error, "not running after calibration");
    // 1 idle + 1 load, then 11 waits of SETTLE+1 cycles each with a step cycle
    check(cyc >= 11 * (SETTLE + 2) && cyc <= 11 * (SETTLE + 2) + 4,
          $sformatf("calibration took %0d cycles, expected about %0d", cyc, 11 * (SETTLE + 2) + 2));
    check(loads.size() == 1 && loads[0] == OSC_PER_FARM, "farms not loaded with all oscillators at start-up");
    loads.delete();

    command(1);   // off
    check(!run && status.state == 4'(ST_OFF) && !status.enabled, "not off");
    check(loads.size() == 1 && loads[0] == 0, "oscillators not stopped when switched off");
    loads.delete();
    command(0);   // on
    check(run && status.enabled, "not back on");
    check(loads.size() == 1 && loads[0] == OSC_PER_FARM, "farms not reloaded when switched on");
    loads.delete();

    slope = 40;   // the chain got faster: the tap must move to 25
    command(2);
    wait_cal(cyc);
    check(io_tap == 5'd25, $sformatf("recalibrated tap %0d, expected 25", io_tap));
    check(run && !status.cal_error, "not running after recalibration");

    slope = 20;   // set point out of reach: error, last tap
    command(2);
    wait_cal(cyc);
    check(io_tap == 5'd31 && status.cal_error, "unreachable set point not flagged");

    slope = 100;  // recalibrate while switched off: stays off
    command(1);
    loads.delete();
    command(2);
    wait_cal(cyc);
    check(io_tap == 5'd10 && !run && status.state == 4'(ST_OFF), "calibration while off did not return to off");
    check(loads.size() == 2 && loads[0] == OSC_PER_FARM && loads[1] == 0, "wrong farm loads around an off-state calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
