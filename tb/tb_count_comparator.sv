// tb_count_comparator: R must be 0 when count_up >= count_dn and 1 otherwise;
// checked on the equal, off-by-one and extreme cases and on random counts.
`timescale 1ns / 1ps
module tb_count_comparator;
  int checks = 0, failures = 0;

  logic [15:0] up, dn;
  logic        r;

  count_comparator #(.W(16)) dut (.count_up(up), .count_dn(dn), .r(r));

  task automatic try(input logic [15:0] a, input logic [15:0] b);
    up = a; dn = b;
    #1ns;
    checks++;
    if (r !== ((int'(a) - int'(b) >= 0) ? 1'b0 : 1'b1)) begin
      failures++; $display("FAIL: up=%0d dn=%0d r=%b", a, b, r);
    end
  endtask

  initial begin
    try(0, 0); try(1, 0); try(0, 1); try(16'hFFFF, 16'hFFFF);
    try(16'hFFFF, 0); try(0, 16'hFFFF); try(49148, 49147); try(49147, 49148);
    for (int k = 0; k < 500; k++) try(16'($urandom), 16'($urandom));
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
