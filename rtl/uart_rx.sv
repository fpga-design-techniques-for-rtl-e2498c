// uart_rx -- 8N1 asynchronous serial receiver for the host link.
//
// The line is synchronised with two flip-flops. A falling edge starts a frame;
// the receiver waits half a bit to the middle of the start bit, checks it is
// still low, then samples eight data bits (LSB first) and the stop bit one bit
// period apart. A frame whose stop bit is high is delivered as one valid pulse
// with the byte; a bad stop bit drops the frame. The paper names only a serial
// link to the host; UART framing is this design's choice.
//
// Interface: rx asynchronous, idle high; data/valid in clk. CLKS_PER_BIT is
// the clock frequency divided by the baud rate.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868   // 100 MHz / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rx_state_e;

  rx_state_e     state;
  logic [1:0]    sync;
  logic [CW-1:0] timer;
  logic [2:0]    bit_idx;
  logic [7:0]    shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync    <= 2'b11;
      state   <= R_IDLE;
      timer   <= '0;
      bit_idx <= '0;
      shift   <= '0;
      data    <= '0;
      valid   <= 1'b0;
    end else begin
      sync  <= {sync[0], rx};
      valid <= 1'b0;
      case (state)
        R_IDLE: if (!sync[1]) begin
          timer <= CW'(CLKS_PER_BIT / 2);
          state <= R_START;
        end
        R_START: if (timer == '0) begin
          if (!sync[1]) begin
            timer   <= CW'(CLKS_PER_BIT - 1);
            bit_idx <= '0;
            state   <= R_DATA;
          end else begin
            state <= R_IDLE;
          end
        end else timer <= timer - 1'b1;
        R_DATA: if (timer == '0) begin
          shift <= {sync[1], shift[7:1]};
          timer <= CW'(CLKS_PER_BIT - 1);
          if (bit_idx == 3'd7) state <= R_STOP;
          bit_idx <= bit_idx + 1'b1;
        end else timer <= timer - 1'b1;
        R_STOP: if (timer == '0) begin
          if (sync[1]) begin
            data  <= shift;
            valid <= 1'b1;
          end
          state <= R_IDLE;
        end else timer <= timer - 1'b1;
        default: state <= R_IDLE;
      endcase
    end
  end

endmodule
