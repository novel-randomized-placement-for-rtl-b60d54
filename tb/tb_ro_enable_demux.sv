// tb_ro_enable_demux: exhaustive check of the enable demux for N = 16 and for
// N = 5 (a select range that is not a power of two): with en high exactly the
// selected output is 1, with en low all are 0.
`timescale 1ns / 1ps
module tb_ro_enable_demux;
  int checks = 0, failures = 0;

  logic        en;
  logic [3:0]  sel16;
  logic [15:0] out16;
  logic [2:0]  sel5;
  logic [4:0]  out5;

  ro_enable_demux #(.N(16)) dut16 (.en(en), .sel(sel16), .en_out(out16));
  ro_enable_demux #(.N(5))  dut5  (.en(en), .sel(sel5),  .en_out(out5));

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int s = 0; s < 16; s++) begin
        en = e[0]; sel16 = 4'(s); sel5 = 3'(s % 8);
        #1ns;
        checks++;
        if (out16 !== (e ? 16'(1) << s : 16'h0)) begin
          failures++; $display("FAIL: N16 en=%0d sel=%0d out=%h", e, s, out16);
        end
        checks++;
        if (out5 !== ((e && (s % 8) < 5) ? 5'(1) << (s % 8) : 5'h0)) begin
          failures++; $display("FAIL: N5 en=%0d sel=%0d out=%b", e, s % 8, out5);
        end
      end
    end
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
