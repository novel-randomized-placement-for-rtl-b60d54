// pulse_counter: "CNT UP" / "CNT DN", the pulse counter of one group.
//
// Counts rising edges of the selected oscillator (the pulse count alpha, so
// f = alpha / t_on) while `en` is high. It is clocked by the oscillator
// itself; `clr` clears it asynchronously, which works while the oscillator is
// stopped. The controller reads `count` only after the rings have stopped, so
// the value is static when the system clock domain samples it.
// The width and the saturation at all ones are this design's choices: 16 bits
// hold 122.87 us of a 533 MHz ring, above any frequency seen on the target
// FPGAs, and saturating keeps an overlong window from wrapping.
`timescale 1ns / 1ps
module pulse_counter #(
  parameter int unsigned W = 16
) (
  input  logic         ro_clk,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] count
);

  always_ff @(posedge ro_clk or posedge clr) begin
    if (clr) begin
      count <= '0;
    end else if (en && count != '1) begin
      count <= count + 1'b1;
    end
  end

endmodule
