// tb_decide -- checks the decision stage: one strobe every 16 cycles, inc when
// the filtered value is below the set point 1024, dec above, nothing at the
// set point or while disabled.
module tb_decide;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b1;
  logic [11:0] filt = 12'd1024;
  logic strobe, inc, dec;
  int last_strobe = -1, cycle = 0;
  int n_strobe = 0, n_inc = 0, n_dec = 0;

  decide #(.FILT_W(12)) dut (.clk, .rst_n, .enable, .filt, .strobe, .inc, .dec);

  always #5000 clk = ~clk;

  always @(posedge clk) if (rst_n) cycle++;

  always @(negedge clk) if (rst_n) begin
    if (strobe) begin
      if (last_strobe >= 0) begin
        checks++;
        if (cycle - last_strobe != 16) begin
          failures++;
          $display("FAIL strobe interval %0d cycles, expected 16", cycle - last_strobe);
        end
      end
      last_strobe = cycle;
      n_strobe++;
      n_inc += int'(inc);
      n_dec += int'(dec);
      checks++;
      if (inc != (enable && filt < 12'd1024) || dec != (enable && filt > 12'd1024)) begin
        failures++;
        $display("FAIL filt=%0d enable=%b inc=%b dec=%b", filt, enable, inc, dec);
      end
      // new stimulus right after a decision
      filt   = 12'($urandom_range(1000, 1048));
      if ($urandom_range(0, 3) == 0) filt = 12'd1024;
      enable = ($urandom_range(0, 4) != 0);
    end else begin
      checks++;
      if (inc || dec) begin
        failures++;
        $display("FAIL inc/dec outside a decision cycle");
      end
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12000 rst_n = 1'b1;
    repeat (16 * 200) @(posedge clk);
    #1;
    // about 200 decisions must have been taken, some of each kind
    checks++;
    if (n_strobe < 190 || n_inc == 0 || n_dec == 0) begin
      failures++;
      $display("FAIL %0d decisions (%0d inc, %0d dec), expected about 200", n_strobe, n_inc, n_dec);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
