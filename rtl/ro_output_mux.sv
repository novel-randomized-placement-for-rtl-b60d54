// ro_output_mux: the "M/2-to-1" block of one oscillator group.
//
// Passes the output of the oscillator chosen by the group's challenge bits to
// the group's pulse counter, where it serves as the counter's clock. Purely
// combinational; the same select bits drive the group's enable demux, so the
// selected output is the one that runs. A select at or above N gives 0.
`timescale 1ns / 1ps
module ro_output_mux #(
  parameter int unsigned N     = 16,
  parameter int unsigned SEL_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]     ro_in,
  input  logic [SEL_W-1:0] sel,
  output logic             ro_sel
);

  always_comb begin
    ro_sel = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      if (sel == SEL_W'(i)) ro_sel = ro_in[i];
    end
  end

endmodule
