// ring_oscillator: BEHAVIOURAL MODEL, not synthesizable logic.
//
// On the FPGA each oscillator is an enable AND gate closing a ring of an odd
// number of inverters (three in the drawing), built by hand-placed LUTs in one
// slice, followed by a latch element. A combinational loop has no RTL form, so
// this model only reproduces what the rest of the PUF sees: while `en` is high
// `ro_out` toggles every HALF_PERIOD_PS picoseconds; while `en` is low the
// latch holds the last level. HALF_PERIOD_PS is the ring delay d of the
// delay model (sum of element delays plus routing delay), i.e. f = 1/(2d),
// and stands for the device's process variation at the slice where the
// enrollment flow placed this oscillator.
//
// Interface: en (input), ro_out (output), the ports of the real ring.
// Timing: the first edge comes one half period after en rises; a toggle
// pending when en falls is dropped. The latch behaviour on disable is this
// design's reading; the paper calls the element a latch and gives no more.
// A synthesis tool reads this model as a latch fed back through an inverter
// and reports a combinational loop and a latch. Both warnings stand: that
// loop is what a ring oscillator is. The model is for simulation only; on
// the FPGA the ring is built from hand-placed LUTs held by placement and
// routing constraints.
`timescale 1ns / 1ps
module ring_oscillator #(
  parameter int unsigned HALF_PERIOD_PS = 1250
) (
  input  logic en,
  output logic ro_out
);

  logic osc;

  initial osc = 1'b0;

  always begin
    wait (en);
    #(HALF_PERIOD_PS * 1ps);
    if (en) osc = ~osc;
  end

  assign ro_out = osc;

endmodule
