// tb_ro_group: a group of four oscillators with distinct half periods. For each
// select it runs the group for 200.3 ns, counts the rising edges on the group
// output and compares them with the selected slot's expected count; it also
// checks that only the selected ring is enabled and that nothing toggles
// while the group is disabled.
`timescale 1ns / 1ps
module tb_ro_group;
  int checks = 0, failures = 0;

  localparam int unsigned HP [4] = '{1000, 1100, 1250, 1400};

  logic       en = 1'b0;
  logic [1:0] sel = '0;
  logic       ro_sel;
  int         rises = 0;

  ro_group #(.N(4), .HALF_PS(HP)) dut (.en(en), .sel(sel), .ro_sel(ro_sel));

  always @(posedge ro_sel) rises++;

  function automatic int exp_rises(input longint t_ps, input longint h_ps);
    return (t_ps <= h_ps) ? 0 : int'((t_ps - h_ps - 1) / (2 * h_ps)) + 1;
  endfunction

  initial begin
    #20ns;
    for (int s = 0; s < 4; s++) begin
      sel = 2'(s);
      #5ns;
      rises = 0;
      en = 1'b1;
      #1ns;
      checks++;
      if (dut.ro_en !== 4'(1) << s) begin
        failures++; $display("FAIL: ring enables %b for sel %0d", dut.ro_en, s);
      end
      #199.3ns;
      en = 1'b0;
      checks++;
      if (rises != exp_rises(200300, HP[s])) begin
        failures++; $display("FAIL: sel %0d rises %0d exp %0d", s, rises, exp_rises(200300, HP[s]));
      end
      rises = 0;
      #30ns;
      checks++;
      if (rises != 0 || dut.ro_en !== 4'b0) begin
        failures++; $display("FAIL: activity while disabled (sel %0d)", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
