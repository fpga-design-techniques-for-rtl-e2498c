// tb_ring_osc -- checks the ring oscillator model: still while disabled,
// period 2 * 7 stages * 500 ps = 7 ns while enabled, still again after.
module tb_ring_osc;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic en = 1'b0;
  logic osc;
  int   rises = 0;
  realtime last_rise = 0, period = 0;

  ring_osc dut (.en, .osc);

  always @(posedge osc) begin
    period    = $realtime - last_rise;
    last_rise = $realtime;
    rises++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000;                       // settle from random start
    rises = 0;
    #100000;
    check(rises == 0, "oscillates while disabled");
    check(osc == 1'b1, "disabled ring not parked high");
    en = 1'b1;
    #1000;
    rises = 0;
    #700000;                      // 100 periods of 7 ns
    check(rises >= 99 && rises <= 101, $sformatf("%0d rising edges in 700 ns, expected 100", rises));
    check(period > 6999.99 && period < 7000.01, $sformatf("period %.3f ps, expected 7000", period));
    en = 1'b0;
    #20000;
    rises = 0;
    #100000;
    check(rises == 0, "still oscillating after disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
