// tdc_capture -- sampling registers and encoder of the carry-chain TDC.
//
// The reference clock travels down the carry chain; on every rising edge of
// the 400 MHz TDC clock the chain is frozen into a first register rank and
// passed through a second rank, as drawn in the paper's architecture figure
// (two register columns clocked by CLK_TDC). The second rank gives the first
// a full cycle to resolve metastable taps.
//
// The encoder turns the thermometer snapshot into a number. Taps the clock's
// rising edge has already passed read 1, taps still waiting for it read 0. The
// reported code is the count of 0 taps: the distance the edge still has to go.
// It therefore grows when the core voltage sags and the carry elements slow
// down, which is the sense the paper describes ("as the IR drop increases ...
// the edge will shift to a higher TDC output"). Counting ones instead of
// searching for the first transition makes the code immune to isolated
// bubbles. The encoder itself is this design's choice; the paper shows only
// the registers.
//
// Interface: taps (asynchronous, from the chain), code valid every clk_tdc
// cycle. Latency: a snapshot taken at edge n appears on code after edge n+2.
module tdc_capture #(
  parameter int unsigned TAPS   = stab_pkg::TDC_TAPS,
  parameter int unsigned CODE_W = $clog2(TAPS + 1)
) (
  input  logic              clk_tdc,
  input  logic              rst_n,
  input  logic [TAPS-1:0]   taps,
  output logic [CODE_W-1:0] code
);

  logic [TAPS-1:0] rank1, rank2;

  always_ff @(posedge clk_tdc or negedge rst_n) begin
    if (!rst_n) begin
      rank1 <= '0;
      rank2 <= '0;
      code  <= '0;
    end else begin
      rank1 <= taps;
      rank2 <= rank1;
      code  <= CODE_W'(TAPS) - CODE_W'($countones(rank2));
    end
  end

endmodule
