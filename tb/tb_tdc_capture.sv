// tb_tdc_capture -- checks the TDC registers and encoder: the code is the
// number of 0 taps of the snapshot taken two clk_tdc edges earlier, for
// clean thermometer codes and codes with bubbles.
module tb_tdc_capture;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int TAPS = 32;
  int checks = 0, failures = 0;
  logic clk_tdc = 1'b0, rst_n = 1'b0;
  logic [TAPS-1:0] taps = '0;
  logic [5:0] code;
  logic [TAPS-1:0] hist [$];

  tdc_capture #(.TAPS(TAPS)) dut (.clk_tdc, .rst_n, .taps, .code);

  always #1250 clk_tdc = ~clk_tdc;

  function automatic int zeros(input logic [TAPS-1:0] v);
    int z = 0;
    for (int i = 0; i < TAPS; i++) if (!v[i]) z++;
    return z;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #6000 rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk_tdc);
      if (hist.size() == 3) begin
        checks++;
        if (int'(code) != zeros(hist[0])) begin
          failures++;
          $display("FAIL code %0d, expected %0d for %b", code, zeros(hist[0]), hist[0]);
        end
        void'(hist.pop_front());
      end
      begin
        int k;
        k = $urandom_range(0, TAPS);
        taps = (k == 0) ? '0 : {TAPS{1'b1}} >> (TAPS - k);   // k taps passed
        if (n % 5 == 0) taps[$urandom_range(0, TAPS - 1)] ^= 1'b1;  // bubble
      end
      hist.push_back(taps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
