// ro_group: one of the PUF's two groups (upper or lower) of M/2 oscillators.
//
// Holds N ring oscillators, the enable demux in front of them and the output
// mux behind them. The challenge bits `sel` pick one slot: that oscillator
// alone is enabled while `en` is high, and its output appears on `ro_sel`.
// HALF_PS[i] is the half period of the oscillator placed in slot i; in the
// paper's flow the enrollment software chooses which characterized FPGA
// location (and so which frequency) lands in which slot, with a random slot
// order ("randomized placement"), so the slot order is the placement.
`timescale 1ns / 1ps
module ro_group #(
  parameter int unsigned N     = 16,
  parameter int unsigned SEL_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned HALF_PS [N] = '{default: 1250}
) (
  input  logic             en,
  input  logic [SEL_W-1:0] sel,
  output logic             ro_sel
);

  logic [N-1:0] ro_en;
  logic [N-1:0] ro_out;

  ro_enable_demux #(.N(N), .SEL_W(SEL_W)) u_demux (
    .en     (en),
    .sel    (sel),
    .en_out (ro_en)
  );

  for (genvar i = 0; i < N; i++) begin : g_ro
    ring_oscillator #(.HALF_PERIOD_PS(HALF_PS[i])) u_ro (
      .en     (ro_en[i]),
      .ro_out (ro_out[i])
    );
  end

  ro_output_mux #(.N(N), .SEL_W(SEL_W)) u_mux (
    .ro_in  (ro_out),
    .sel    (sel),
    .ro_sel (ro_sel)
  );

endmodule
