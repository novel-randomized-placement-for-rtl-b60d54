// tb_ropuf_workloads: the four PUF sizes the evaluation uses, M8, M16, M32 and
// M64 (15, 63, 255 and 1023 response bits), each run for one complete
// response in parallel with a 3 us enable window instead of 122.87 us.
`timescale 1ns / 1ps
module tb_ropuf_workloads;
  int c8, f8, o8, c16, f16, o16, c32, f32, o32, c64, f64, o64;
  bit d8, d16, d32, d64;

  ropuf_workload_run #(.M(8),  .T_ON(300), .SEED(16'h0005)) u_m8  (.checks(c8),  .failures(f8),  .ones(o8),  .finished(d8));
  ropuf_workload_run #(.M(16), .T_ON(300), .SEED(16'h002B)) u_m16 (.checks(c16), .failures(f16), .ones(o16), .finished(d16));
  ropuf_workload_run #(.M(32), .T_ON(300), .SEED(16'h00C3)) u_m32 (.checks(c32), .failures(f32), .ones(o32), .finished(d32));
  ropuf_workload_run #(.M(64), .T_ON(300), .SEED(16'h0211)) u_m64 (.checks(c64), .failures(f64), .ones(o64), .finished(d64));

  initial begin
    wait (d8 && d16 && d32 && d64);
    $display("M8: %0d ones of 15, M16: %0d of 63, M32: %0d of 255, M64: %0d of 1023", o8, o16, o32, o64);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + c32 + c64, f8 + f16 + f32 + f64);
    $finish;
  end

  initial begin
    #20ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + c32 + c64, f8 + f16 + f32 + f64 + 1);
    $finish;
  end
endmodule
