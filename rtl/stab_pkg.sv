// stab_pkg -- constants and types shared by the supply-stabilizer blocks.
//
// The stabilizer keeps the power drawn by an FPGA constant: a carry-chain TDC
// watches how fast the logic currently is (a proxy for the local core voltage),
// a decision maker averages that reading, and farms of ring oscillators are
// switched on when the logic speeds up (less load) and off when it slows down.
//
// Numbers taken from the paper: 400 MHz TDC clock, 100 MHz system clock, four
// TDC results summed per system cycle, 64 measurements per decision (6.25 MHz),
// four farms of 128 oscillators, each oscillator a NAND plus six buffers.
// Everything else here (TDC length, IIR shift, host command codes) is this
// design's own choice and is marked as such.
package stab_pkg;
  // ---- from the paper -------------------------------------------------------
  localparam int unsigned N_SUM            = 4;    // TDC results added per 100 MHz cycle
  localparam int unsigned MEAS_PER_DECIDE  = 64;   // TDC results per decision (400 MHz / 6.25 MHz)
  localparam int unsigned N_FARMS          = 4;    // oscillator farms
  localparam int unsigned OSC_PER_FARM     = 128;  // oscillators per farm
  localparam int unsigned OSC_BUFFERS      = 6;    // LUT buffers after the NAND in each ring

  // ---- this design's choices ------------------------------------------------
  localparam int unsigned TDC_TAPS         = 32;   // carry taps sampled by the TDC
  localparam int unsigned DUMMY_TAPS       = 40;   // dummy carry elements ahead of the TDC
  localparam int unsigned IODLY_TAPS       = 32;   // IO delay settings (5-bit tap)
  localparam int unsigned IIR_SHIFT        = 4;    // IIR coefficient 2^-IIR_SHIFT
  localparam int unsigned CAL_SETTLE       = 128;  // 100 MHz cycles waited per calibration step

  // Host command bytes (ASCII letters, so a terminal can drive the link).
  typedef enum logic [7:0] {
    CMD_ON     = 8'h45,  // 'E': stabilizer on
    CMD_OFF    = 8'h44,  // 'D': stabilizer off, all oscillators stopped
    CMD_CAL    = 8'h43,  // 'C': repeat the IO-delay calibration
    CMD_COUNT  = 8'h4E,  // 'N': read oscillators running per farm
    CMD_TDC    = 8'h54,  // 'T': read filtered TDC value (integer part, SUM4 scale)
    CMD_TAP    = 8'h49,  // 'I': read IO delay tap
    CMD_STATUS = 8'h53   // 'S': read status byte
  } host_cmd_e;

  localparam logic [7:0] REPLY_UNKNOWN = 8'h3F;  // '?'

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE     = 3'd0,
    ST_CAL_LOAD = 3'd1,
    ST_CAL_WAIT = 3'd2,
    ST_CAL_STEP = 3'd3,
    ST_RUN      = 3'd4,
    ST_OFF      = 3'd5
  } ctrl_state_e;

  // Status the controller reports to the host.
  typedef struct packed {
    logic        cal_error;  // calibration ran out of IO delay taps
    logic        cal_done;   // a calibration has completed
    logic        running;    // regulation loop active
    logic        enabled;    // host wants the stabilizer on
    logic [3:0]  state;      // ctrl_state_e, zero-extended
  } stab_status_t;

endpackage
