// sum4 -- adds groups of four TDC codes and hands each sum to the system clock.
//
// The TDC runs at 400 MHz and the rest of the decision maker at 100 MHz. As in
// the paper, four consecutive TDC results are added; that both averages them
// and brings the rate down to one value per 100 MHz cycle. A 2-bit phase
// counter in the TDC domain accumulates codes; on the fourth code the total is
// written to a holding register, which therefore changes once every four TDC
// cycles and is stable for a whole system cycle. The system domain registers
// it every cycle.
//
// This crossing relies on both clocks coming from the same clock manager with
// aligned edges (400 MHz = 4 x 100 MHz); it is then an ordinary synchronous
// path for timing analysis. That assumption, and the structure, are this
// design's choice: the paper states only the summing and the two frequencies.
//
// Interface: code in clk_tdc domain (one per cycle); sum in clk_sys domain,
// a new value every clk_sys cycle. Latency from the last code of a group to
// sum: at most one clk_tdc plus one clk_sys cycle.
module sum4 #(
  parameter int unsigned CODE_W = 6,
  parameter int unsigned N      = stab_pkg::N_SUM,
  parameter int unsigned SUM_W  = CODE_W + $clog2(N)
) (
  input  logic              clk_tdc,
  input  logic              clk_sys,
  input  logic              rst_n,
  input  logic [CODE_W-1:0] code,
  output logic [SUM_W-1:0]  sum
);

  localparam int unsigned PH_W = (N > 1) ? $clog2(N) : 1;

  logic [PH_W-1:0]  phase;
  logic [SUM_W-1:0] acc;
  logic [SUM_W-1:0] hold;

  // TDC domain: accumulate N codes, then publish.
  always_ff @(posedge clk_tdc or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      acc   <= '0;
      hold  <= '0;
    end else if (phase == PH_W'(N - 1)) begin
      phase <= '0;
      acc   <= '0;
      hold  <= acc + SUM_W'(code);
    end else begin
      phase <= phase + 1'b1;
      acc   <= acc + SUM_W'(code);
    end
  end

  // System domain: one sum per cycle.
  always_ff @(posedge clk_sys or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else        sum <= hold;
  end

endmodule
