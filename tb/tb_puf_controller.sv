// tb_puf_controller: runs the controller for a 4-bit challenge (15 bits) with
// short phases (clear 2, enable 5, settle 3). A stand-in comparator output
// follows a fixed bit pattern. Checks: EN high for exactly T_ON cycles per
// bit, never together with the counter clear; one seed load and 14 LFSR steps
// taken only with EN low; 15 response bits equal to the pattern; busy and a
// single done pulse; run length 15 * (2+5+3+2) - 1 cycles from start to done.
`timescale 1ns / 1ps
module tb_puf_controller;
  int checks = 0, failures = 0;

  localparam int unsigned T_ON = 5, CLR = 2, SETTLE = 3, NB = 15;
  localparam logic [NB-1:0] PATTERN = 15'b101_1001_1100_0101;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, r;
  logic ro_en, cnt_clr, lfsr_load, lfsr_step, resp, resp_valid, busy, done;

  puf_controller #(.W(4), .T_ON_CYCLES(T_ON), .CLR_CYCLES(CLR), .SETTLE_CYCLES(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .r(r), .ro_en(ro_en), .cnt_clr(cnt_clr),
    .lfsr_load(lfsr_load), .lfsr_step(lfsr_step), .resp(resp), .resp_valid(resp_valid),
    .busy(busy), .done(done));

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int en_run = 0, bits = 0, steps = 0, loads = 0, dones = 0, en_bursts = 0;
  realtime t_start = 0.0;
  bit armed = 0;

  // The stand-in comparator presents the pattern bit of the current challenge.
  always_comb r = PATTERN[bits % NB];

  always @(posedge clk) if (armed) begin
    if (ro_en && cnt_clr) check(0, "EN together with counter clear");
    if (lfsr_step && ro_en) check(0, "LFSR step while EN high");
    if (ro_en) en_run++;
    else if (en_run != 0) begin
      check(en_run == T_ON, $sformatf("EN high for %0d cycles", en_run));
      en_bursts++;
      en_run = 0;
    end
    if (lfsr_step) steps++;
    if (lfsr_load) loads++;
    if (resp_valid) begin
      check(resp == PATTERN[bits], $sformatf("bit %0d resp %b", bits, resp));
      bits++;
    end
    if (done) dones++;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1ns rst_n = 1'b1;
    armed = 1;
    check(!cnt_clr && !ro_en && !busy, "idle after reset");
    @(negedge clk) start = 1'b1;
    @(posedge clk) t_start = $realtime;
    #1ns start = 1'b0;
    check(busy, "busy after start");
    @(posedge done);
    // cycles from the edge that takes start to the edge that raises done
    check(int'(($realtime - t_start) / 10.0) == NB * (CLR + T_ON + SETTLE + 2) - 1,
          $sformatf("run took %0d cycles", int'(($realtime - t_start) / 10.0)));
    @(negedge clk);
    check(!busy, "not busy after done");
    repeat (20) @(negedge clk);
    check(bits == NB, $sformatf("%0d response bits", bits));
    check(steps == NB - 1, $sformatf("%0d LFSR steps", steps));
    check(loads == 1, $sformatf("%0d seed loads", loads));
    check(dones == 1, $sformatf("%0d done pulses", dones));
    check(en_bursts == NB, $sformatf("%0d enable windows", en_bursts));
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
