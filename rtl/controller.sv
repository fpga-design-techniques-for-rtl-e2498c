// controller -- start-up calibration and on/off control of the stabilizer.
//
// At start-up the paper uses the IO delay to move the reference clock edge to
// the middle of the TDC range, so that afterwards the TDC should read half its
// range and any drift is the supply's doing. This controller does that by a
// linear search: it loads the oscillator farms with their starting level, sets
// the IO delay to tap 0, waits SETTLE system cycles for the filter to follow,
// and compares the filtered TDC value with the set point. Below it, the tap is
// raised by one and the wait repeats; at or above it, calibration is done. If
// the last tap is reached first, calibration ends with cal_error set and the
// last tap kept. Then the regulation loop runs (decision maker enabled) if the
// host wants the stabilizer on, or all oscillators are stopped if not.
//
// Host commands (single-cycle pulses from the serial link): on, off and
// recalibrate. Switching on reloads the farms with INIT_COUNT oscillators
// each. The search, the starting level and the on/off behaviour are this
// design's choices; the paper gives only the goal of the calibration.
// INIT_COUNT defaults to all oscillators: with the stabilizer on, the paper's
// board draws about 0.5 W before the load is applied instead of 0.25 W, i.e.
// the oscillators start mostly running and are shed as the load rises.
//
// Interface: all signals in clk_sys. farm_load is a one-cycle pulse carrying
// farm_count; run enables the decision maker's inc/dec outputs.
module controller
  import stab_pkg::*;
#(
  parameter int unsigned FILT_W     = 12,
  parameter int unsigned TAP_BITS   = 5,
  parameter int unsigned CNT_W      = $clog2(OSC_PER_FARM + 1),
  parameter int unsigned INIT_COUNT = OSC_PER_FARM,
  parameter int unsigned SETPOINT   = (N_SUM * TDC_TAPS / 2) << IIR_SHIFT,
  parameter int unsigned SETTLE     = CAL_SETTLE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [FILT_W-1:0]   filt,
  input  logic                cmd_on,
  input  logic                cmd_off,
  input  logic                cmd_cal,
  output logic [TAP_BITS-1:0] io_tap,
  output logic                run,
  output logic                farm_load,
  output logic [CNT_W-1:0]    farm_count,
  output stab_status_t        status
);

  localparam int unsigned WAIT_W = $clog2(SETTLE + 1);

  ctrl_state_e       state;
  logic [WAIT_W-1:0] wait_cnt;
  logic              enabled, cal_done, cal_error;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      wait_cnt   <= '0;
      io_tap     <= '0;
      enabled    <= 1'b1;
      cal_done   <= 1'b0;
      cal_error  <= 1'b0;
      farm_load  <= 1'b0;
      farm_count <= '0;
    end else begin
      farm_load <= 1'b0;
      if (cmd_on)  enabled <= 1'b1;
      if (cmd_off) enabled <= 1'b0;

      unique case (state)
        ST_IDLE: state <= ST_CAL_LOAD;

        ST_CAL_LOAD: begin
          farm_load  <= 1'b1;
          farm_count <= CNT_W'(INIT_COUNT);
          io_tap     <= '0;
          cal_done   <= 1'b0;
          cal_error  <= 1'b0;
          wait_cnt   <= WAIT_W'(SETTLE);
          state      <= ST_CAL_WAIT;
        end

        ST_CAL_WAIT: begin
          if (wait_cnt == '0) state <= ST_CAL_STEP;
          else                wait_cnt <= wait_cnt - 1'b1;
        end

        ST_CAL_STEP: begin
          if (filt >= FILT_W'(SETPOINT) || io_tap == '1) begin
            cal_done  <= 1'b1;
            cal_error <= (filt < FILT_W'(SETPOINT));
            if (enabled && !cmd_off) begin
              state <= ST_RUN;
            end else begin
              farm_load  <= 1'b1;
              farm_count <= '0;
              state      <= ST_OFF;
            end
          end else begin
            io_tap   <= io_tap + 1'b1;
            wait_cnt <= WAIT_W'(SETTLE);
            state    <= ST_CAL_WAIT;
          end
        end

        ST_RUN: begin
          if (cmd_cal) begin
            state <= ST_CAL_LOAD;
          end else if (cmd_off) begin
            farm_load  <= 1'b1;
            farm_count <= '0;
            state      <= ST_OFF;
          end
        end

        ST_OFF: begin
          if (cmd_cal) begin
            state <= ST_CAL_LOAD;
          end else if (cmd_on) begin
            farm_load  <= 1'b1;
            farm_count <= CNT_W'(INIT_COUNT);
            state      <= ST_RUN;
          end
        end

        default: state <= ST_IDLE;
      endcase
    end
  end

  assign run    = (state == ST_RUN);
  assign status = '{cal_error: cal_error, cal_done: cal_done, running: run,
                    enabled: enabled, state: {1'b0, state}};

endmodule
