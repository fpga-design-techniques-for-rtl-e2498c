// tb_decision_maker -- drives constant and noisy TDC codes at 400 MHz and
// checks the filtered value (16 * 4 * code once settled), one decision per 64
// codes, inc below mid-range (16), dec above it, none at it or when disabled.
module tb_decision_maker;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic clk_tdc = 1'b0, clk_sys = 1'b0, rst_n = 1'b0;
  logic [5:0] code = 6'd16;
  logic enable = 1'b1;
  logic [7:0] sum;
  logic [11:0] filt;
  logic strobe, inc, dec;
  int n_inc = 0, n_dec = 0, n_strobe = 0, tdc_edges = 0;

  decision_maker dut (.clk_tdc, .clk_sys, .rst_n, .code, .enable, .sum, .filt, .strobe, .inc, .dec);

  initial begin
    #1250;
    forever begin clk_tdc = 1'b1; #1250; clk_tdc = 1'b0; #1250; end
  end
  initial begin
    #1250;
    forever begin clk_sys = 1'b1; #5000; clk_sys = 1'b0; #5000; end
  end

  always @(posedge clk_tdc) if (rst_n) tdc_edges++;
  always @(posedge clk_sys) if (rst_n) begin
    n_inc    += int'(inc);
    n_dec    += int'(dec);
    n_strobe += int'(strobe);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Hold a code for 'decisions' decisions and count the outcome of the last ones.
  task automatic phase(input int c, input bit en, input int jitter, input string name,
                       input int want_inc, input int want_dec);
    int i0, d0, s0, e0;
    enable = en;
    code   = 6'(c);
    repeat (16 * 8) @(posedge clk_sys);        // let the filter settle
    i0 = n_inc; d0 = n_dec; s0 = n_strobe; e0 = tdc_edges;
    for (int i = 0; i < 16 * 20; i++) begin
      @(negedge clk_tdc);
      code = 6'(c + ((jitter > 0) ? $urandom_range(0, 2 * jitter) - jitter : 0));
      @(negedge clk_tdc);
      code = 6'(c + ((jitter > 0) ? $urandom_range(0, 2 * jitter) - jitter : 0));
      @(negedge clk_tdc);
      code = 6'(c + ((jitter > 0) ? $urandom_range(0, 2 * jitter) - jitter : 0));
      @(negedge clk_tdc);
      code = 6'(c + ((jitter > 0) ? $urandom_range(0, 2 * jitter) - jitter : 0));
    end
    check(n_strobe - s0 == 20, $sformatf("%s: %0d decisions in 1280 TDC cycles, expected 20", name, n_strobe - s0));
    check((tdc_edges - e0) / (n_strobe - s0) == 64, $sformatf("%s: not 64 measurements per decision", name));
    check(n_inc - i0 == want_inc, $sformatf("%s: %0d inc, expected %0d", name, n_inc - i0, want_inc));
    check(n_dec - d0 == want_dec, $sformatf("%s: %0d dec, expected %0d", name, n_dec - d0, want_dec));
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #21350 rst_n = 1'b1;
    code = 6'd16;
    repeat (200) @(posedge clk_sys);
    #1;
    check(filt == 12'd1024, $sformatf("settled filter %0d, expected 16*4*16 = 1024", filt));
    check(sum == 8'd64, $sformatf("sum %0d, expected 64", sum));
    phase(16, 1'b1, 0, "mid-range", 0, 0);
    phase(12, 1'b1, 0, "fast logic", 20, 0);
    phase(21, 1'b1, 0, "slow logic", 0, 20);
    phase(12, 1'b0, 0, "disabled", 0, 0);
    phase(10, 1'b1, 2, "fast logic with jitter", 20, 0);
    phase(23, 1'b1, 2, "slow logic with jitter", 0, 20);
    code = 6'd20;
    repeat (200) @(posedge clk_sys);
    #1;
    check(filt >= 12'd1280 && filt <= 12'd1295, $sformatf("settled filter %0d, expected 1280..1295", filt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
