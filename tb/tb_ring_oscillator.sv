// tb_ring_oscillator: checks the oscillator model's period, its silence while
// disabled and that the latch holds the output level when the ring stops.
// Two instances (500 MHz and 400 MHz) are enabled for windows that are not
// multiples of the half period; the rising edges counted are compared with
// floor((T - H - 1) / 2H) + 1, the edge times with 2H apart.
`timescale 1ns / 1ps
module tb_ring_oscillator;
  int checks = 0, failures = 0;

  logic en_a = 1'b0, en_b = 1'b0;
  logic out_a, out_b;
  int   rises_a = 0, rises_b = 0;
  realtime last_rise_a = 0.0;
  realtime period_a = 0.0;

  ring_oscillator #(.HALF_PERIOD_PS(1000)) dut_a (.en(en_a), .ro_out(out_a));
  ring_oscillator #(.HALF_PERIOD_PS(1250)) dut_b (.en(en_b), .ro_out(out_b));

  always @(posedge out_a) begin
    rises_a++;
    if (last_rise_a != 0.0) period_a = $realtime - last_rise_a;
    last_rise_a = $realtime;
  end
  always @(posedge out_b) rises_b++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int exp_rises(input longint t_ps, input longint h_ps);
    return (t_ps <= h_ps) ? 0 : int'((t_ps - h_ps - 1) / (2 * h_ps)) + 1;
  endfunction

  logic held;

  initial begin
    #50ns;
    check(rises_a == 0 && rises_b == 0, "no edges while disabled after start");
    // window of 100.3 ns
    en_a = 1'b1; en_b = 1'b1;
    #100.3ns;
    en_a = 1'b0; en_b = 1'b0;
    check(rises_a == exp_rises(100300, 1000), $sformatf("A rises %0d exp %0d", rises_a, exp_rises(100300, 1000)));
    check(rises_b == exp_rises(100300, 1250), $sformatf("B rises %0d exp %0d", rises_b, exp_rises(100300, 1250)));
    check(period_a > 1.999 && period_a < 2.001, $sformatf("A period %0f ns", period_a));
    held = out_b;
    #40ns;
    check(out_b == held, "B holds its level while disabled");
    check(rises_a == exp_rises(100300, 1000), "A silent while disabled");
    // second window of 57.7 ns on A only
    rises_a = 0; rises_b = 0;
    en_a = 1'b1;
    #57.7ns;
    en_a = 1'b0;
    check(rises_a >= exp_rises(57700, 1000) - 1 && rises_a <= exp_rises(57700, 1000) + 1,
          $sformatf("A second window rises %0d", rises_a));
    check(rises_b == 0, "B stays off while only A runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
