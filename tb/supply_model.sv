// supply_model -- testbench model of the FPGA's power delivery: a supply at
// room temperature feeding the chip through cables, and the resulting speed
// of the carry chain.
//
// The chip draws P = main + n_running * P_OSC. Through a total cable
// resistance R from a supply VS the local voltage V obeys V = VS - R * P / V,
// so V = (VS + sqrt(VS^2 - 4 R P)) / 2. The carry delay grows as V falls,
// linearised as tau = TAU_PS * (1 + SENS * (V_REF - V)).
// Numbers: VS = 1.1 V and R = 0.3 ohm; a 0.25 W load then gives 1.03 V and
// 0.4 W gives 0.98 V, and SENS = 3.2 /V makes that 50 mV sag slow the carry
// elements by 16 % (25 ps -> 29 ps). P_OSC = 0.5 mW per oscillator, so 512
// oscillators burn about 0.25 W. The voltage is recomputed every UPDATE_PS.
module supply_model #(
  parameter real     VS        = 1.1,
  parameter real     R_OHM     = 0.3,
  parameter real     P_OSC_W   = 0.5e-3,
  parameter real     TAU_PS    = 25.0,
  parameter real     V_REF     = 1.03,
  parameter real     SENS      = 3.2,
  parameter realtime UPDATE_PS = 10000.0
) (
  input  int unsigned  main_uw,       // power of the rest of the chip, microwatts
  input  int unsigned  n_running,     // oscillators switched on
  output logic [19:0]  carry_delay_fs,
  output real          v_fpga
);
  timeunit 1ps;
  timeprecision 1fs;

  real p, tau;

  initial begin
    forever begin
      p      = real'(main_uw) * 1.0e-6 + real'(n_running) * P_OSC_W;
      v_fpga = (VS + $sqrt(VS * VS - 4.0 * R_OHM * p)) / 2.0;
      tau    = TAU_PS * (1.0 + SENS * (V_REF - v_fpga));
      carry_delay_fs = 20'($rtoi(tau * 1000.0));
      #(UPDATE_PS);
    end
  end
endmodule
