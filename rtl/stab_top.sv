// stab_top -- FPGA-internal supply stabilizer: TDC, decision maker, oscillator
// farms, controller and host link.
//
// The reference clock passes through the IO delay and a row of dummy carry
// elements into the TDC's carry chain, where the 400 MHz TDC clock samples how
// far its rising edge has travelled. Core-voltage sag slows the carry
// elements (the IO delay, on the IO supply, does not move), so the TDC code
// rises with the load. The decision maker adds four codes per 100 MHz cycle,
// filters the sums and every 64 measurements switches one oscillator in each
// of the four farms on (code below mid-range) or off (code above), keeping the
// chip's total power -- and so its IR drop -- constant. The controller
// calibrates the IO delay at start-up so the code sits at mid-range, and
// obeys on/off/recalibrate commands from the host link.
//
// The carry chains, IO delay and ring oscillators are behavioural models (see
// their files); carry_delay_fs stands for the momentary speed of the core
// logic and is driven by whatever models the supply. The clock manager that
// makes clk_sys (100 MHz), clk_tdc (400 MHz, edge-aligned with clk_sys) and
// clk_ref (the reference sent down the chain, here at the TDC frequency) is
// outside this module, as is the circuit whose power is being compensated.
//
// Interface: rst_n is an asynchronous active-low reset for both clock domains;
// host_rx/host_tx are the UART lines; osc_en/osc_out show every oscillator
// (farm f, oscillator i at index f*OSC_PER_FARM+i); the remaining outputs are
// observation points.
//
// Timing: the TDC code reaches the farms about 20 system cycles after a
// supply change (capture, SUM4, IIR, next decision strobe); the loop then
// moves four oscillators per 160 ns.
//
// Follows the paper: the block map, 400/100 MHz clocks, SUM4, IIR, decisions
// every 64 measurements, four farms of 128 seven-stage rings, inc/dec four at
// a time. Own choices: TDC length, dummy count, IIR coefficient, calibration
// procedure, start level, host protocol.
//
// Synthesis reports combinational loops in this design; they are the 512 ring
// oscillators (see ring_osc) and are intended.
module stab_top
  import stab_pkg::*;
#(
  parameter int unsigned TAPS         = TDC_TAPS,
  parameter int unsigned DUMMIES      = DUMMY_TAPS,
  parameter int unsigned FARMS        = N_FARMS,
  parameter int unsigned OSCS         = OSC_PER_FARM,
  parameter int unsigned INIT_COUNT   = OSC_PER_FARM,
  parameter int unsigned SETTLE       = CAL_SETTLE,
  parameter int unsigned CLKS_PER_BIT = 868,
  parameter int unsigned CODE_W       = $clog2(TAPS + 1),
  parameter int unsigned SUM_W        = CODE_W + $clog2(N_SUM),
  parameter int unsigned FILT_W       = SUM_W + IIR_SHIFT,
  parameter int unsigned CNT_W        = $clog2(OSCS + 1)
) (
  input  logic                  clk_sys,
  input  logic                  clk_tdc,
  input  logic                  clk_ref,
  input  logic                  rst_n,
  input  logic                  host_rx,
  output logic                  host_tx,
  input  logic [19:0]           carry_delay_fs,
  output logic [FARMS*OSCS-1:0] osc_en,
  output logic [FARMS*OSCS-1:0] osc_out,
  output logic [CODE_W-1:0]     tdc_code,
  output logic [FILT_W-1:0]     tdc_filt,
  output logic [SUM_W-1:0]      tdc_sum,
  output logic                  decide_strobe,
  output logic                  inc,
  output logic                  dec,
  output logic [4:0]            io_tap,
  output stab_status_t          status
);

  localparam int unsigned SETPOINT = (N_SUM * TAPS / 2) << IIR_SHIFT;

  // ---- TDC path -------------------------------------------------------------
  logic               clk_cali;
  logic [DUMMIES-1:0] dummy_taps;
  logic [TAPS-1:0]    tdc_taps;

  io_delay u_io_delay (.d_in(clk_ref), .tap(io_tap), .d_out(clk_cali));

  carry_chain #(.N(DUMMIES)) u_dummies (
    .d_in(clk_cali), .delay_fs(carry_delay_fs), .taps(dummy_taps)
  );

  carry_chain #(.N(TAPS)) u_tdc_chain (
    .d_in(dummy_taps[DUMMIES-1]), .delay_fs(carry_delay_fs), .taps(tdc_taps)
  );

  tdc_capture #(.TAPS(TAPS), .CODE_W(CODE_W)) u_tdc (
    .clk_tdc, .rst_n, .taps(tdc_taps), .code(tdc_code)
  );

  // ---- decision maker -------------------------------------------------------
  logic run;

  decision_maker #(
    .TAPS(TAPS), .CODE_W(CODE_W), .SHIFT(IIR_SHIFT), .SUM_W(SUM_W), .FILT_W(FILT_W)
  ) u_dm (
    .clk_tdc, .clk_sys, .rst_n, .code(tdc_code), .enable(run),
    .sum(tdc_sum), .filt(tdc_filt), .strobe(decide_strobe), .inc, .dec
  );

  // ---- oscillator farms -----------------------------------------------------
  logic             farm_load;
  logic [CNT_W-1:0] farm_load_count;
  logic [CNT_W-1:0] farm_count [FARMS];

  for (genvar f = 0; f < FARMS; f++) begin : g_farm
    osc_farm #(.N(OSCS), .CNT_W(CNT_W)) u_farm (
      .clk(clk_sys), .rst_n, .inc, .dec,
      .load(farm_load), .load_count(farm_load_count),
      .count(farm_count[f]),
      .osc_en(osc_en[f*OSCS +: OSCS]),
      .osc_out(osc_out[f*OSCS +: OSCS])
    );
  end

  // ---- controller and host link ---------------------------------------------
  logic cmd_on, cmd_off, cmd_cal;

  controller #(
    .FILT_W(FILT_W), .TAP_BITS(5), .CNT_W(CNT_W),
    .INIT_COUNT(INIT_COUNT), .SETPOINT(SETPOINT), .SETTLE(SETTLE)
  ) u_ctrl (
    .clk(clk_sys), .rst_n, .filt(tdc_filt), .cmd_on, .cmd_off, .cmd_cal,
    .io_tap, .run, .farm_load, .farm_count(farm_load_count), .status
  );

  serial_comm #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_serial (
    .clk(clk_sys), .rst_n, .rx(host_rx), .tx(host_tx),
    .cmd_on, .cmd_off, .cmd_cal,
    .osc_count(8'(farm_count[0])),
    .tdc_value(8'(tdc_filt >> IIR_SHIFT)),
    .io_tap(8'(io_tap)),
    .status
  );

endmodule
