// tb_ropuf_uniqueness: uniqueness across devices, with and without randomized
// placement. Eight simulated devices use randomized placement and four use
// sorted placement (see ropuf_device_run). Every device gives a full 255-bit
// response; the testbench then computes the mean pairwise fractional Hamming
// distance HD_inter = mean over pairs of HD(R_i, R_j) / 255. Ideal is 0.5.
// With sorted placement all devices rank their oscillators alike and so give
// the same response (HD_inter near 0); randomized placement must bring
// HD_inter into 0.40 .. 0.60.
`timescale 1ns / 1ps
module tb_ropuf_uniqueness;
  localparam int unsigned NR = 8, NO = 4, K = 255;

  logic [254:0] r_rand [NR];
  logic [254:0] r_ord  [NO];
  int  c_rand [NR], f_rand [NR], c_ord [NO], f_ord [NO];
  bit  d_rand [NR], d_ord [NO];

  for (genvar i = 0; i < NR; i++) begin : g_rand
    ropuf_device_run #(.DEV(i), .RANDOMIZED(1'b1)) u_dev (
      .response(r_rand[i]), .checks(c_rand[i]), .failures(f_rand[i]), .finished(d_rand[i]));
  end
  for (genvar i = 0; i < NO; i++) begin : g_ord
    ropuf_device_run #(.DEV(100 + i), .RANDOMIZED(1'b0)) u_dev (
      .response(r_ord[i]), .checks(c_ord[i]), .failures(f_ord[i]), .finished(d_ord[i]));
  end

  int checks = 0, failures = 0;

  function automatic real mean_hd(input logic [254:0] r [], input int unsigned n);
    real sum;
    int pairs;
    sum = 0.0; pairs = 0;
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned j = i + 1; j < n; j++) begin
        sum += real'($countones(r[i] ^ r[j])) / real'(K);
        pairs++;
      end
    return sum / real'(pairs);
  endfunction

  initial begin
    logic [254:0] dr [];
    logic [254:0] dord [];
    real hd_r, hd_o;
    bit all_done;
    do begin
      #1us;
      all_done = 1;
      for (int i = 0; i < NR; i++) all_done &= d_rand[i];
      for (int i = 0; i < NO; i++) all_done &= d_ord[i];
    end while (!all_done);
    for (int i = 0; i < NR; i++) begin checks += c_rand[i]; failures += f_rand[i]; end
    for (int i = 0; i < NO; i++) begin checks += c_ord[i];  failures += f_ord[i];  end
    dr = new[NR]; dord = new[NO];
    for (int i = 0; i < NR; i++) dr[i] = r_rand[i];
    for (int i = 0; i < NO; i++) dord[i] = r_ord[i];
    hd_r = mean_hd(dr, NR);
    hd_o = mean_hd(dord, NO);
    $display("HD_inter randomized placement: %0.4f (%0d devices)", hd_r, NR);
    $display("HD_inter sorted placement:     %0.4f (%0d devices)", hd_o, NO);
    checks++;
    if (!(hd_r > 0.40 && hd_r < 0.60)) begin failures++; $display("FAIL: randomized HD_inter out of range"); end
    checks++;
    if (!(hd_o < 0.05)) begin failures++; $display("FAIL: sorted placement should repeat the response"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
