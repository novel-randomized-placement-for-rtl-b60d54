// tb_challenge_lfsr: for the 8-bit (M32) and 4-bit (M8) LFSRs, checks that
// the state sequence matches a reference shift register built here from the
// feedback polynomial's exponents, that it visits all 2^W - 1 non-zero states
// once before returning to the seed, that step low holds the state, and that
// an all-zero seed loads as 1.
`timescale 1ns / 1ps
module tb_challenge_lfsr;
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, step = 1'b0;
  logic [7:0] seed8 = '0, st8;
  logic [3:0] seed4 = '0, st4;

  challenge_lfsr #(.W(8)) dut8 (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed8), .step(step), .state(st8));
  challenge_lfsr #(.W(4)) dut4 (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed4), .step(step), .state(st4));

  always #5ns clk = ~clk;

  // Reference: x^8+x^6+x^5+x^4+1 and x^4+x^3+1, shifting towards the MSB.
  function automatic logic [7:0] ref8(input logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction
  function automatic logic [3:0] ref4(input logic [3:0] s);
    return {s[2:0], s[3] ^ s[2]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit seen8 [256];
  bit seen4 [16];
  logic [7:0] e8;
  logic [3:0] e4;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(st8 == 8'd1 && st4 == 4'd1, "reset state is 1");
    seed8 = 8'h5A; seed4 = 4'h9; load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    check(st8 == 8'h5A && st4 == 4'h9, "seed loaded");
    @(negedge clk);
    check(st8 == 8'h5A && st4 == 4'h9, "holds without step");
    e8 = 8'h5A; e4 = 4'h9;
    step = 1'b1;
    for (int k = 0; k < 255; k++) begin
      if (k < 15) begin
        check(!seen4[st4], $sformatf("4-bit state %h repeats early", st4));
        seen4[st4] = 1'b1;
        check(st4 == e4, $sformatf("4-bit step %0d: %h exp %h", k, st4, e4));
      end
      check(!seen8[st8], $sformatf("8-bit state %h repeats early", st8));
      seen8[st8] = 1'b1;
      check(st8 == e8, $sformatf("8-bit step %0d: %h exp %h", k, st8, e8));
      e8 = ref8(e8);
      e4 = (k < 15) ? ref4(e4) : e4;
      @(negedge clk);
      if (k == 14) check(st4 == 4'h9, "4-bit period is 15");
    end
    check(st8 == 8'h5A, "8-bit period is 255");
    step = 1'b0;
    seed8 = '0; seed4 = '0; load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    check(st8 == 8'd1 && st4 == 4'd1, "zero seed loads as 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
