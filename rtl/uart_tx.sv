// uart_tx -- 8N1 asynchronous serial transmitter for the host link.
//
// A start request loads the byte; the line then carries a low start bit, the
// eight data bits LSB first and a high stop bit, each CLKS_PER_BIT cycles
// long. busy is high from the cycle after start until the stop bit has ended;
// start is ignored while busy. UART framing is this design's choice.
//
// Interface: data/start/busy in clk; tx idles high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       start,
  output logic       busy,
  output logic       tx
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [CW-1:0] timer;
  logic [3:0]    bit_idx;   // 0 start, 1..8 data, 9 stop
  logic [9:0]    frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      tx      <= 1'b1;
      timer   <= '0;
      bit_idx <= '0;
      frame   <= '1;
    end else if (!busy) begin
      tx <= 1'b1;
      if (start) begin
        frame   <= {1'b1, data, 1'b0};
        busy    <= 1'b1;
        bit_idx <= '0;
        timer   <= CW'(CLKS_PER_BIT - 1);
        tx      <= 1'b0;
      end
    end else if (timer == '0) begin
      if (bit_idx == 4'd9) begin
        busy <= 1'b0;
        tx   <= 1'b1;
      end else begin
        bit_idx <= bit_idx + 1'b1;
        tx      <= frame[bit_idx + 1'b1];
        timer   <= CW'(CLKS_PER_BIT - 1);
      end
    end else begin
      timer <= timer - 1'b1;
    end
  end

endmodule
