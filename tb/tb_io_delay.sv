// tb_io_delay -- checks the IO delay model: arrival time = BASE + tap * TAP
// for several taps, for rising and falling edges, and that a tap change
// applies to the next edge.
module tb_io_delay;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic       d_in = 1'b0;
  logic [4:0] tap = '0;
  logic       d_out;

  io_delay dut (.d_in, .tap, .d_out);

  task automatic measure(input logic [4:0] t, input logic level);
    realtime t0, dt, expect_ps;
    tap = t;
    #5000;
    t0 = $realtime;
    d_in = level;
    @(d_out);
    dt = $realtime - t0;
    expect_ps = 600.0 + 78.125 * real'(t);   // 600 ps insertion, 78.125 ps per tap
    checks++;
    if (dt < expect_ps - 0.002 || dt > expect_ps + 0.002 || d_out !== level) begin
      failures++;
      $display("FAIL tap=%0d level=%b delay=%.3f ps expected %.3f ps", t, level, dt, expect_ps);
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
    #10000;
    measure(5'd0, 1'b1);
    measure(5'd1, 1'b0);
    measure(5'd7, 1'b1);
    measure(5'd16, 1'b0);
    measure(5'd31, 1'b1);
    measure(5'd3, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
