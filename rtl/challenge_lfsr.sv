// challenge_lfsr: maximal-length LFSR that generates the challenges.
//
// A W-bit Fibonacci LFSR with XOR feedback (polynomial from ropuf_pkg). Its
// state is the challenge C: the low half selects the upper-group oscillator,
// the high half the lower-group one. `load` copies `seed` into the register
// (an all-zero seed, the lock-up state, becomes 1); `step` shifts once. From
// any non-zero seed it visits all 2^W - 1 non-zero states before repeating.
// Interface: clk, asynchronous active-low rst_n (state resets to 1).
// Timing: load and step take effect on the next rising clk edge; load wins.
`timescale 1ns / 1ps
module challenge_lfsr
  import ropuf_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] seed,
  input  logic         step,
  output logic [W-1:0] state
);

  localparam logic [W-1:0] TAPS = W'(lfsr_taps(W));

  initial begin
    assert (TAPS != '0)
      else $error("challenge_lfsr: no feedback polynomial for W=%0d", W);
  end

  logic feedback;
  assign feedback = ^(state & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W'(1);
    end else if (load) begin
      state <= (seed == '0) ? W'(1) : seed;
    end else if (step) begin
      state <= {state[W-2:0], feedback};
    end
  end

  // The register must never reach the all-zero lock-up state.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);

endmodule
