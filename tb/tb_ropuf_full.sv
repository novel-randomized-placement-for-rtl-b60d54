// tb_ropuf_full: one complete response of the PUF at its default size: M = 32,
// 255 challenges, a 122.87 us enable window (12287 cycles of a 100 MHz clock)
// and the default example device. For each bit it checks the challenge
// against its own model of the 8-bit LFSR (x^8+x^6+x^5+x^4+1), both pulse
// counts against t_on / (2 d) within one count, and the response bit against
// the comparison of the two oscillators' half periods; then the run length.
`timescale 1ns / 1ps
module tb_ropuf_full;
  localparam int unsigned NB = 255, SEL_W = 4, W = 8;
  localparam longint T_PS = 64'd12287 * 10000;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0] seed = 8'hA7;
  logic resp, resp_valid, busy, done;
  logic [W-1:0] challenge;
  logic [15:0] count_up, count_dn;

  ropuf_top dut (
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

  int bits = 0, n_r1 = 0;
  realtime t_start = 0.0;
  logic [W-1:0] exp_c;
  logic [NB-1:0] response;


  initial begin
    repeat (3) @(posedge clk);
    #1ns rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(posedge clk) begin t_start = $realtime; end
    #1ns start = 1'b0;
    exp_c = seed;
    while (bits < NB) begin
      @(posedge clk);
      if (resp_valid) begin
        int unsigned u, l, hu, hl;
        int cu, cl;
        u  = challenge[SEL_W-1:0];
        l  = challenge[W-1:SEL_W];
        hu = dut.UG_HALF_PS[u];
        hl = dut.LG_HALF_PS[l];
        cu = exp_count(hu);
        cl = exp_count(hl);
        check(challenge == exp_c, $sformatf("challenge %h exp %h", challenge, exp_c));
        check(int'(count_up) >= cu - 1 && int'(count_up) <= cu + 1,
              $sformatf("count_up %0d exp %0d", count_up, cu));
        check(int'(count_dn) >= cl - 1 && int'(count_dn) <= cl + 1,
              $sformatf("count_dn %0d exp %0d", count_dn, cl));
        check(resp == ((hu > hl) ? 1'b1 : 1'b0), $sformatf("bit %0d resp %b", bits, resp));
        response[bits] = resp;
        n_r1 += resp;
        exp_c = {exp_c[6:0], exp_c[7] ^ exp_c[5] ^ exp_c[4] ^ exp_c[3]};
        bits++;
      end
    end
    while (!done_seen) @(posedge clk);
    done_seen = 0;
    check(int'((t_done - t_start) / 10.0) == NB * (2 + 12287 + 4 + 2) - 1, $sformatf("run took %0d cycles", int'((t_done - t_start) / 10.0)));
    $display("response (%0d ones of %0d): %h", n_r1, NB, response);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
