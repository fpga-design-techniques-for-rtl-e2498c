// ring_osc -- behavioural model of one power-burning ring oscillator.
//
// This is a behavioural model, not synthesizable logic: a ring oscillator is a
// combinational loop whose frequency is set by the delay of its cells, which a
// zero-delay model cannot represent. As in the paper, the ring is a NAND gate,
// whose second input is the enable, followed by six LUTs used as buffers, with
// the last buffer fed back to the NAND: one inversion in a loop of seven
// stages.
//
// The model keeps that timing but not one process per stage, so that a
// testbench with hundreds of oscillators stays fast. With en low the NAND
// output and every buffer sit at 1, so osc is 1 and nothing moves. When en
// rises, the edge needs one trip round the seven stages to reach osc; from
// then on osc toggles every 7 * STAGE_FS, a period of 2 * 7 * STAGE_FS. When
// en falls the ring drains and osc is left at 1 after at most one more half
// period. The stage delay is this design's choice.
//
// Synthesis tools read the model as a combinational loop (osc feeds its own
// next value) and warn about it; that loop is the oscillator and is intended.
// In a real FPGA the ring is seven LUTs placed by hand with their loop
// allowed in the constraints.
//
// Interface: en (asynchronous), osc = output of the last buffer.
module ring_osc #(
  parameter int unsigned BUFFERS  = 6,       // LUT buffers after the NAND
  parameter int unsigned STAGE_FS = 500000   // delay per stage, femtoseconds
) (
  input  logic en,
  output logic osc
);
  timeunit 1ps;
  timeprecision 1fs;

  // One trip round the loop: the NAND plus every buffer.
  localparam realtime HALF_PERIOD = real'((BUFFERS + 1) * STAGE_FS) / 1000.0;

  initial osc = 1'b1;

  always begin
    if (!en) begin
      osc = 1'b1;          // parked: NAND output high, all buffers high
      @(en);
    end else begin
      #(HALF_PERIOD);
      osc = en ? ~osc : 1'b1;
    end
  end

endmodule
