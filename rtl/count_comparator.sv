// count_comparator: the "Comparator" that turns two pulse counts into R.
//
// R = 0 when the count difference count_up - count_dn is zero or positive,
// R = 1 when it is negative, i.e. R = 0 when the upper-group oscillator is at
// least as fast as the lower-group one. Combinational. Which group is
// subtracted from which is this design's choice; the rule "0 when the
// difference is >= 0, else 1" is the paper's.
`timescale 1ns / 1ps
module count_comparator #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] count_up,
  input  logic [W-1:0] count_dn,
  output logic         r
);

  assign r = (count_up < count_dn);

endmodule
