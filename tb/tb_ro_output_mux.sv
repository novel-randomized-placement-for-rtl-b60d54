// tb_ro_output_mux: drives random oscillator levels and every select value of
// a 16-input mux and checks that the output equals the selected input.
`timescale 1ns / 1ps
module tb_ro_output_mux;
  int checks = 0, failures = 0;

  logic [15:0] ro_in;
  logic [3:0]  sel;
  logic        ro_sel;

  ro_output_mux #(.N(16)) dut (.ro_in(ro_in), .sel(sel), .ro_sel(ro_sel));

  initial begin
    for (int t = 0; t < 64; t++) begin
      ro_in = 16'($urandom);
      for (int s = 0; s < 16; s++) begin
        sel = 4'(s);
        #1ns;
        checks++;
        if (ro_sel !== ro_in[s]) begin
          failures++; $display("FAIL: in=%h sel=%0d out=%b", ro_in, s, ro_sel);
        end
      end
    end
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
