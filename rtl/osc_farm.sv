// osc_farm -- one farm of ring oscillators with its on/off control.
//
// The farm holds N ring oscillators (128 in the paper) whose only job is to
// burn power. The number running is held as a thermometer code in a shift
// register, matching the chain of oscillators the paper draws with the inc and
// dec lines running through it: inc shifts a 1 in at the bottom, switching one
// more oscillator on; dec shifts a 0 in at the top, switching the highest one
// off. Both saturate. A load input sets the count directly; the controller
// uses it to start regulation from a known level and to stop all oscillators
// when the stabilizer is off (this load is this design's choice).
//
// Interface: clk/rst_n synchronous control; inc, dec, load are single-cycle
// requests (load wins, then inc, then dec if both were raised). count and
// osc_en change one cycle after the request. osc_out are the free-running
// oscillator outputs, exposed so that nothing trims the rings away.
//
// Synthesis warns of combinational loops here: one per ring oscillator, which
// is what the farm is for.
module osc_farm #(
  parameter int unsigned N       = stab_pkg::OSC_PER_FARM,
  parameter int unsigned CNT_W   = $clog2(N + 1),
  parameter int unsigned BUFFERS = stab_pkg::OSC_BUFFERS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inc,
  input  logic             dec,
  input  logic             load,
  input  logic [CNT_W-1:0] load_count,
  output logic [CNT_W-1:0] count,
  output logic [N-1:0]     osc_en,
  output logic [N-1:0]     osc_out
);

  function automatic logic [N-1:0] thermometer(input logic [CNT_W-1:0] n);
    logic [N-1:0] t;
    for (int i = 0; i < N; i++) t[i] = (i < int'(n));
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      osc_en <= '0;
      count  <= '0;
    end else if (load) begin
      osc_en <= thermometer((load_count > CNT_W'(N)) ? CNT_W'(N) : load_count);
      count  <= (load_count > CNT_W'(N)) ? CNT_W'(N) : load_count;
    end else if (inc) begin
      osc_en <= {osc_en[N-2:0], 1'b1};
      if (count != CNT_W'(N)) count <= count + 1'b1;
    end else if (dec) begin
      osc_en <= {1'b0, osc_en[N-1:1]};
      if (count != '0) count <= count - 1'b1;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_osc
    ring_osc #(.BUFFERS(BUFFERS)) u_osc (.en(osc_en[i]), .osc(osc_out[i]));
  end

  // The shift register must stay a thermometer code matching the counter.
  assert property (@(posedge clk) disable iff (!rst_n) $countones(osc_en) == int'(count));

endmodule
