// tb_carry_chain -- checks the carry-chain model: tap i follows the input
// after (i+1) element delays, and the element delay follows its input port.
module tb_carry_chain;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int N = 8;
  int checks = 0, failures = 0;
  logic         d_in = 1'b0;
  logic [19:0]  delay_fs = 20'd20000;
  logic [N-1:0] taps;
  realtime      seen [N];

  carry_chain #(.N(N)) dut (.d_in, .delay_fs, .taps);

  logic [N-1:0] prev_taps;
  always @(taps) begin
    for (int i = 0; i < N; i++) if (taps[i] != prev_taps[i]) seen[i] = $realtime;
    prev_taps = taps;
  end

  task automatic run_edge(input int unsigned dfs, input logic level);
    realtime t0, expect_ps;
    delay_fs = 20'(dfs);
    #5000;
    t0 = $realtime;
    d_in = level;
    #5000;
    for (int i = 0; i < N; i++) begin
      expect_ps = real'(i + 1) * real'(dfs) / 1000.0;
      checks++;
      if (seen[i] - t0 < expect_ps - 0.002 || seen[i] - t0 > expect_ps + 0.002 || taps[i] !== level) begin
        failures++;
        $display("FAIL tap %0d: %.3f ps after the edge, expected %.3f ps", i, seen[i] - t0, expect_ps);
      end
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
    run_edge(20000, 1'b1);
    run_edge(20000, 1'b0);
    run_edge(24500, 1'b1);   // a slower chain: lower core voltage
    run_edge(15250, 1'b0);   // a faster chain
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
