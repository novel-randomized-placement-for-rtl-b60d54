// ropuf_device_run: testbench helper modelling one FPGA device carrying the
// PUF (M = 32, short enable window). The device's M selected locations have
// half periods 1000 + 12 k + v(DEV, k) ps, k = 0..M-1, where v in 0..5 ps is
// a device-specific variation smaller than the 12 ps spacing, so the
// frequency ranking is the same on every device, as after a selection that
// spreads frequencies evenly. With RANDOMIZED = 0 location k goes to slot k/2
// of the upper (even k) or lower (odd k) group, a sorted placement. With
// RANDOMIZED = 1 the M locations are shuffled into the slots by a
// device-seeded Fisher-Yates shuffle, a randomized placement. The helper runs
// one full 255-bit response, checks every bit against the half periods and
// returns the response.
`timescale 1ns / 1ps
module ropuf_device_run #(
  parameter int unsigned DEV        = 0,
  parameter bit          RANDOMIZED = 1'b1,
  parameter int unsigned T_ON       = 100
) (
  output logic [254:0] response,
  output int           checks,
  output int           failures,
  output bit           finished
);
  localparam int unsigned M = 32, N = 16, SEL_W = 4, W = 8, NB = 255;
  localparam longint T_PS = longint'(T_ON) * 10000;

  typedef int unsigned half_t [N];
  typedef int unsigned loc_t [M];

  function automatic int unsigned lcg(input int unsigned s);
    return s * 32'd1664525 + 32'd1013904223;
  endfunction

  // Slot order: location index placed in slot j (j < N upper, j >= N lower).
  function automatic loc_t placement();
    loc_t p;
    int unsigned s, r, t;
    for (int unsigned j = 0; j < M; j++) p[j] = (j < N) ? 2 * j : 2 * (j - N) + 1;
    if (RANDOMIZED) begin
      s = 32'h9E37_79B9 ^ (DEV * 32'd2654435761);
      for (int unsigned j = M - 1; j > 0; j--) begin
        s = lcg(s);
        r = (s >> 8) % (j + 1);
        t = p[j]; p[j] = p[r]; p[r] = t;
      end
    end
    return p;
  endfunction

  function automatic int unsigned half_of(input int unsigned k);
    int unsigned s;
    s = lcg(lcg((DEV + 1) * 32'd7919 + k * 32'd104729));
    return 1000 + 12 * k + (s >> 16) % 6;
  endfunction

  function automatic half_t group_halves(input bit lower);
    half_t h;
    loc_t p;
    p = placement();
    for (int unsigned i = 0; i < N; i++) h[i] = half_of(p[lower ? N + i : i]);
    return h;
  endfunction

  localparam half_t UG = group_halves(1'b0);
  localparam half_t LG = group_halves(1'b1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic resp, resp_valid, busy, done;
  logic [W-1:0] challenge;
  logic [15:0] count_up, count_dn;

  ropuf_top #(.M(M), .T_ON_CYCLES(T_ON), .UG_HALF_PS(UG), .LG_HALF_PS(LG)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(8'h01), .resp(resp),
    .resp_valid(resp_valid), .challenge(challenge), .count_up(count_up),
    .count_dn(count_dn), .busy(busy), .done(done));

  always #5ns clk = ~clk;

  initial begin
    int bits;
    checks = 0; failures = 0; finished = 0; bits = 0; response = '0;
    repeat (3) @(posedge clk);
    #1ns rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (bits < NB) begin
      @(posedge clk);
      if (resp_valid) begin
        checks++;
        if (resp !== ((UG[challenge[3:0]] > LG[challenge[7:4]]) ? 1'b1 : 1'b0)) begin
          failures++;
          $display("FAIL (device %0d): bit %0d", DEV, bits);
        end
        response[bits] = resp;
        bits++;
      end
    end
    finished = 1;
  end
endmodule
