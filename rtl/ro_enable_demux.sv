// ro_enable_demux: the "1-to-M/2" block of one oscillator group.
//
// Routes the controller's enable to the single oscillator that the group's
// challenge bits select; every other oscillator of the group gets 0 and stays
// still, so only two rings of the whole PUF run at a time. Purely
// combinational. The paper names the block; the one-hot gated decoder is the
// simplest circuit that does its job.
`timescale 1ns / 1ps
module ro_enable_demux #(
  parameter int unsigned N     = 16,
  parameter int unsigned SEL_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             en,
  input  logic [SEL_W-1:0] sel,
  output logic [N-1:0]     en_out
);

  always_comb begin
    en_out = '0;
    for (int unsigned i = 0; i < N; i++) begin
      en_out[i] = en && (sel == SEL_W'(i));
    end
  end

endmodule
