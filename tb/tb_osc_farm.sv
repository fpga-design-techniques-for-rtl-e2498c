// tb_osc_farm -- checks one 128-oscillator farm: load, inc and dec move the
// thermometer enable and the count by one, both saturate, and exactly the
// enabled rings oscillate.
module tb_osc_farm;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int N = 128;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic inc = 1'b0, dec = 1'b0, load = 1'b0;
  logic [7:0] load_count = '0;
  logic [7:0] count;
  logic [N-1:0] osc_en, osc_out;
  int model = 0;
  int toggles [N];

  osc_farm dut (.clk, .rst_n, .inc, .dec, .load, .load_count, .count, .osc_en, .osc_out);

  always #5000 clk = ~clk;

  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(osc_out[i]) toggles[i]++;
  end

  task automatic check_state(input string what);
    logic [N-1:0] want;
    for (int i = 0; i < N; i++) want[i] = (i < model);
    checks++;
    if (int'(count) != model || osc_en !== want) begin
      failures++;
      $display("FAIL %s: count %0d, expected %0d, osc_en %h", what, count, model, osc_en);
    end
  endtask

  task automatic pulse(input bit i, input bit d, input bit l, input int lc);
    @(negedge clk);
    inc = i; dec = d; load = l; load_count = 8'(lc);
    @(negedge clk);
    inc = 0; dec = 0; load = 0;
    if (l) model = (lc > N) ? N : lc;
    else if (i) model = (model < N) ? model + 1 : N;
    else if (d) model = (model > 0) ? model - 1 : 0;
    check_state($sformatf("inc=%b dec=%b load=%b(%0d)", i, d, l, lc));
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
    check_state("after reset");
    pulse(0, 0, 1, 5);
    repeat (3) pulse(1, 0, 0, 0);
    repeat (2) pulse(0, 1, 0, 0);
    pulse(1, 1, 0, 0);                        // inc wins over dec
    pulse(0, 0, 1, 126);
    repeat (4) pulse(1, 0, 0, 0);             // saturates at 128
    repeat (20) pulse($urandom_range(0, 1), $urandom_range(0, 1), 0, 0);
    pulse(0, 0, 1, 2);
    repeat (4) pulse(0, 1, 0, 0);             // saturates at 0
    pulse(0, 0, 1, 200);                      // clipped to 128
    pulse(0, 0, 1, 40);
    // exactly the 40 enabled rings run
    #20000;
    for (int i = 0; i < N; i++) toggles[i] = 0;
    #70000;                                   // 10 periods of 7 ns
    for (int i = 0; i < N; i++) begin
      checks++;
      if ((i < 40) ? (toggles[i] < 18 || toggles[i] > 22) : (toggles[i] != 0)) begin
        failures++;
        $display("FAIL oscillator %0d toggled %0d times", i, toggles[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
