// tb_ropuf_top: end-to-end run of the PUF at M = 8 (15-bit response) with a
// 2 us enable window. Eight oscillators with known half periods fill the two
// groups in a shuffled order. For every response bit the testbench predicts,
// from its own LFSR model and the slot half periods, which two oscillators
// were compared, their pulse counts (within one count) and the response bit
// (0 when the upper-group oscillator is at least as fast). It runs three
// complete responses (seeds 0x9, 0x3 and 0, the last exercising the zero-seed
// guard), checks the run length in cycles, and counts how often each
// mechanism happened: both response values, every challenge, every slot of
// each group, seed reload. A mechanism that never happened is a failure.
`timescale 1ns / 1ps
module tb_ropuf_top;
  import ropuf_pkg::*;

  localparam int unsigned M = 8, N = 4, SEL_W = 2, W = 4, NB = 15;
  localparam int unsigned T_ON = 200, CLR = 2, SETTLE = 4;
  localparam int unsigned UG [N] = '{1100, 1000, 1350, 1200};
  localparam int unsigned LG [N] = '{1250, 1050, 1300, 1150};
  localparam longint T_PS = longint'(T_ON) * 10000;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0] seed = '0;
  logic resp, resp_valid, busy, done;
  logic [W-1:0] challenge;
  logic [15:0] count_up, count_dn;

  ropuf_top #(.M(M), .T_ON_CYCLES(T_ON), .CLR_CYCLES(CLR), .SETTLE_CYCLES(SETTLE),
              .UG_HALF_PS(UG), .LG_HALF_PS(LG)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(seed), .resp(resp),
    .resp_valid(resp_valid), .challenge(challenge), .count_up(count_up),
    .count_dn(count_dn), .busy(busy), .done(done));

  always #5ns clk = ~clk;

  realtime t_done = 0.0;
  bit done_seen = 0;
  always @(posedge done) begin t_done = $realtime; done_seen = 1; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int exp_count(input longint h);
    return int'((T_PS - h - 1) / (2 * h)) + 1;
  endfunction

  function automatic logic [W-1:0] ref_next(input logic [W-1:0] s);
    return {s[2:0], s[3] ^ s[2]};  // x^4 + x^3 + 1
  endfunction

  int n_r0 = 0, n_r1 = 0, n_runs = 0, n_zero_seed = 0;
  bit seen_c [16];
  bit seen_ug [N];
  bit seen_lg [N];
  logic [W-1:0] exp_c;
  int bits;
  realtime t_start;


  task automatic run(input logic [W-1:0] s);
    @(negedge clk);
    seed  = s;
    start = 1'b1;
    @(posedge clk);
    t_start = $realtime;
    #1ns start = 1'b0;
    exp_c = (s == '0) ? W'(1) : s;
    if (s == '0) n_zero_seed++;
    bits = 0;
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
        check(int'(count_up) >= cu - 1 && int'(count_up) <= cu + 1,
              $sformatf("count_up %0d exp %0d (slot %0d)", count_up, cu, u));
        check(int'(count_dn) >= cl - 1 && int'(count_dn) <= cl + 1,
              $sformatf("count_dn %0d exp %0d (slot %0d)", count_dn, cl, l));
        check(resp == ((UG[u] > LG[l]) ? 1'b1 : 1'b0),
              $sformatf("resp %b for UG slot %0d vs LG slot %0d", resp, u, l));
        if (resp) n_r1++; else n_r0++;
        seen_c[challenge] = 1'b1;
        seen_ug[u] = 1'b1;
        seen_lg[l] = 1'b1;
        exp_c = ref_next(exp_c);
        bits++;
      end
    end
    while (!done_seen) @(posedge clk);
    done_seen = 0;
    check(int'((t_done - t_start) / 10.0) == NB * (CLR + T_ON + SETTLE + 2) - 1, $sformatf("run took %0d cycles", int'((t_done - t_start) / 10.0)));
    @(negedge clk);
    check(!busy, "busy cleared after done");
    n_runs++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1ns rst_n = 1'b1;
    run(4'h9);
    run(4'h3);
    run(4'h0);
    begin
      int nc = 0, nu = 0, nl = 0;
      for (int i = 1; i < 16; i++) nc += seen_c[i];
      for (int i = 0; i < N; i++) begin nu += seen_ug[i]; nl += seen_lg[i]; end
      $display("mechanisms: R=0 %0d, R=1 %0d, challenges %0d/15, UG slots %0d/%0d, LG slots %0d/%0d, runs %0d, zero seed %0d",
               n_r0, n_r1, nc, nu, N, nl, N, n_runs, n_zero_seed);
      check(n_r0 > 0, "response 0 never produced");
      check(n_r1 > 0, "response 1 never produced");
      check(nc == 15, "not every challenge applied");
      check(nu == N && nl == N, "not every slot of both groups selected");
      check(n_runs == 3, "seed reload / repeated run");
      check(n_zero_seed == 1, "zero seed guard not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
