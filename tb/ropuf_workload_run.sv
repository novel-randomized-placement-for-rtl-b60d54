// ropuf_workload_run: testbench helper that builds one PUF of M oscillators
// with a short enable window, runs one complete response from a given seed
// and checks every bit: the challenge against a reference LFSR written from
// the polynomial exponents, both pulse counts within one count of
// t_on / (2 d), and the response bit against the two half periods. Slot half
// periods are 1000 + 15 k ps with k spread over both groups by two
// permutations (upper group even k, lower group odd k), so all M differ.
// Reports its check and failure counts and raises `finished`.
`timescale 1ns / 1ps
module ropuf_workload_run #(
  parameter int unsigned M    = 16,
  parameter int unsigned T_ON = 300,
  parameter logic [15:0] SEED = 16'h0001
) (
  output int checks,
  output int failures,
  output int ones,
  output bit finished
);
  localparam int unsigned N = M / 2;
  localparam int unsigned SEL_W = $clog2(N);
  localparam int unsigned W = 2 * SEL_W;
  localparam int unsigned NB = (1 << W) - 1;
  localparam longint T_PS = longint'(T_ON) * 10000;

  typedef int unsigned half_t [N];

  function automatic half_t gen(input bit lower);
    half_t h;
    for (int unsigned i = 0; i < N; i++) begin
      int unsigned k;
      k = lower ? 2 * ((i * 11 + 5) % N) + 1 : 2 * ((i * 7) % N);
      h[i] = 1000 + 15 * k;
    end
    return h;
  endfunction

  localparam half_t UG = gen(1'b0);
  localparam half_t LG = gen(1'b1);

  function automatic logic [W-1:0] ref_next(input logic [W-1:0] s);
    logic fb;
    case (W)
      4:  fb = s[3] ^ s[2];                  // x^4+x^3+1
      6:  fb = s[5] ^ s[4];                  // x^6+x^5+1
      8:  fb = s[7] ^ s[5] ^ s[4] ^ s[3];    // x^8+x^6+x^5+x^4+1
      10: fb = s[9] ^ s[6];                  // x^10+x^7+1
      default: fb = 1'b0;
    endcase
    return {s[W-2:0], fb};
  endfunction

  function automatic int exp_count(input longint h);
    return int'((T_PS - h - 1) / (2 * h)) + 1;
  endfunction

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic resp, resp_valid, busy, done;
  logic [W-1:0] challenge;
  logic [15:0] count_up, count_dn;

  ropuf_top #(.M(M), .T_ON_CYCLES(T_ON), .UG_HALF_PS(UG), .LG_HALF_PS(LG)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(SEED[W-1:0]), .resp(resp),
    .resp_valid(resp_valid), .challenge(challenge), .count_up(count_up),
    .count_dn(count_dn), .busy(busy), .done(done));

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (M%0d): %s", M, what);
    end
  endtask

  bit seen [1 << W];

  initial begin
    logic [W-1:0] exp_c;
    int bits, distinct;
    checks = 0; failures = 0; ones = 0; finished = 0; bits = 0; distinct = 0;
    repeat (3) @(posedge clk);
    #1ns rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    exp_c = (SEED[W-1:0] == '0) ? W'(1) : SEED[W-1:0];
    while (bits < NB) begin
      @(posedge clk);
      if (resp_valid) begin
        int unsigned u, l;
        int cu, cl;
        u = challenge[SEL_W-1:0];
        l = challenge[W-1:SEL_W];
        cu = exp_count(UG[u]);
        cl = exp_count(LG[l]);
        check(challenge == exp_c, $sformatf("challenge %h exp %h", challenge, exp_c));
        check(int'(count_up) >= cu - 1 && int'(count_up) <= cu + 1, $sformatf("count_up %0d exp %0d", count_up, cu));
        check(int'(count_dn) >= cl - 1 && int'(count_dn) <= cl + 1, $sformatf("count_dn %0d exp %0d", count_dn, cl));
        check(resp == ((UG[u] > LG[l]) ? 1'b1 : 1'b0), $sformatf("bit %0d resp %b", bits, resp));
        if (!seen[challenge]) distinct++;
        seen[challenge] = 1'b1;
        ones += int'(resp);
        exp_c = ref_next(exp_c);
        bits++;
      end
    end
    check(distinct == NB, $sformatf("%0d distinct challenges of %0d", distinct, NB));
    check(ones > 0 && ones < NB, "response has both values");
    finished = 1;
  end
endmodule
