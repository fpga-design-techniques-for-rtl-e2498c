// tb_iir_filter -- compares the filter with an integer reference model of
// y = y + (x - y) / 16 (kept scaled by 16), for random input and for a step,
// and checks the step settles to 16 * x.
module tb_iir_filter;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  x = '0;
  logic [11:0] y;
  int ref_y = 0;

  iir_filter #(.SUM_W(8), .SHIFT(4)) dut (.clk, .rst_n, .x, .y);

  always #5000 clk = ~clk;

  task automatic step_and_check(input int xv);
    @(negedge clk);
    x = 8'(xv);
    @(posedge clk);
    ref_y = ref_y - (ref_y >> 4) + xv;
    #1;
    checks++;
    if (int'(y) != ref_y) begin
      failures++;
      $display("FAIL x=%0d y=%0d expected %0d", xv, y, ref_y);
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
    for (int i = 0; i < 200; i++) step_and_check($urandom_range(0, 128));
    for (int i = 0; i < 200; i++) step_and_check(100);
    checks++;
    if (y < 12'd1600 || y > 12'd1615) begin
      failures++;
      $display("FAIL step settled at %0d, expected 1600..1615", y);
    end
    for (int i = 0; i < 200; i++) step_and_check(255);   // full scale: no overflow
    checks++;
    if (y < 12'd4080) begin
      failures++;
      $display("FAIL full-scale step settled at %0d", y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
