// tb_pulse_counter: feeds a 4-bit and a 16-bit counter with bursts of edges.
// Checks counting while en is high, holding while en is low, the asynchronous
// clear, and saturation of the 4-bit counter at 15.
`timescale 1ns / 1ps
module tb_pulse_counter;
  int checks = 0, failures = 0;

  logic        ro_clk = 1'b0, clr = 1'b0, en = 1'b0;
  logic [3:0]  cnt4;
  logic [15:0] cnt16;

  pulse_counter #(.W(4))  dut4  (.ro_clk(ro_clk), .clr(clr), .en(en), .count(cnt4));
  pulse_counter #(.W(16)) dut16 (.ro_clk(ro_clk), .clr(clr), .en(en), .count(cnt16));

  task automatic pulses(input int n);
    repeat (n) begin
      #1.1ns ro_clk = 1'b1;
      #1.1ns ro_clk = 1'b0;
    end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cnt4=%0d cnt16=%0d)", what, cnt4, cnt16); end
  endtask

  initial begin
    #1ns clr = 1'b1;
    #4ns;
    check(cnt4 == 0 && cnt16 == 0, "cleared by clr");
    clr = 1'b0;
    en  = 1'b1;
    pulses(9);
    check(cnt4 == 9 && cnt16 == 9, "counts 9 edges");
    en = 1'b0;
    pulses(5);
    check(cnt4 == 9 && cnt16 == 9, "holds while en low");
    en = 1'b1;
    pulses(20);
    check(cnt4 == 15, "4-bit counter saturates at 15");
    check(cnt16 == 29, "16-bit counter reaches 29");
    #3ns clr = 1'b1;
    #0.5ns;
    check(cnt4 == 0 && cnt16 == 0, "asynchronous clear without a clock edge");
    #2ns clr = 1'b0;
    for (int k = 0; k < 40; k++) begin
      int n;
      n = int'($urandom_range(1, 300));
      clr = 1'b1; #1ns clr = 1'b0;
      pulses(n);
      check(cnt16 == 16'(n) && cnt4 == ((n > 15) ? 4'd15 : 4'(n)), $sformatf("burst of %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
