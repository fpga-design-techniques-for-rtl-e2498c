// tb_sum4 -- checks the four-code adder and its 400 -> 100 MHz hand-over.
// The 100 MHz output after system edge k must be the sum of the codes sampled
// at TDC edges 4(k-2)+1 .. 4(k-2)+4 (zero for k = 1), one new sum per cycle.
module tb_sum4;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic clk_tdc = 1'b0, clk_sys = 1'b0, rst_n = 1'b0;
  logic [5:0] code = '0;
  logic [7:0] sum;
  int   codes [$];          // code present at each TDC edge after reset
  int   k = 0;              // system edges after reset

  sum4 #(.CODE_W(6)) dut (.clk_tdc, .clk_sys, .rst_n, .code, .sum);

  // Edge-aligned clocks: every fourth TDC rising edge is a system rising edge.
  initial begin
    #1250;
    forever begin clk_tdc = 1'b1; #1250; clk_tdc = 1'b0; #1250; end
  end
  initial begin
    #1250;
    forever begin clk_sys = 1'b1; #5000; clk_sys = 1'b0; #5000; end
  end

  always @(posedge clk_tdc) if (rst_n) codes.push_back(int'(code));
  always @(negedge clk_tdc) code <= 6'($urandom_range(0, 32));

  always @(negedge clk_sys) if (rst_n && k > 0) begin
    int expect_sum;
    expect_sum = 0;
    if (k >= 2) for (int i = 0; i < 4; i++) expect_sum += codes[4 * (k - 2) + i];
    checks++;
    if (int'(sum) != expect_sum) begin
      failures++;
      $display("FAIL after system edge %0d: sum %0d expected %0d", k, sum, expect_sum);
    end
  end
  always @(posedge clk_sys) if (rst_n) k++;

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #21350 rst_n = 1'b1;     // just after a system edge
    repeat (300) @(posedge clk_sys);
    @(negedge clk_sys);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
