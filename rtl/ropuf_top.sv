// ropuf_top: ring oscillator PUF with challenge LFSR (M32 configuration).
//
// M ring oscillators sit in an upper group (UG) and a lower group (LG) of M/2
// each. A maximal-length LFSR produces the challenge C; its low log2(M/2)
// bits pick one upper-group oscillator and its high bits one lower-group
// oscillator. For each challenge the controller runs both selected rings for
// t_on, the two pulse counters (CNT UP for UG, CNT DN for LG) count their
// edges, and the comparator gives R = 0 if the upper count is >= the lower
// count, else 1. Walking the LFSR through all 2^W - 1 states from the seed
// gives the full response: 255 bits for M = 32.
//
// What makes this PUF robust and unique is not in the logic but in which
// oscillators fill the slots: an enrollment flow measures every slice of the
// FPGA, keeps stable oscillators, picks M widely spaced frequencies, assigns
// them to the two groups and shuffles their slot order. UG_HALF_PS and
// LG_HALF_PS (half periods in ps, slot order) stand for that outcome; the
// defaults are an example device, 32 frequencies over 395-442 MHz in a
// shuffled order, not measured data. Overriding M requires overriding both
// arrays with M/2 entries.
//
// Interface: start (one-cycle pulse) with seed begins a run; resp/resp_valid
// give one bit per challenge, `challenge` is the C that produced it while
// resp_valid is high; count_up/count_dn show the last counts; busy/done frame
// the run. Each bit takes CLR_CYCLES + T_ON_CYCLES + SETTLE_CYCLES + 2 clock
// cycles; t_on = 12287 cycles is 122.87 us at the assumed 100 MHz clock.
// The block structure follows the paper's PUF drawing; the challenge split,
// the counter width and the controller's timing are this design's choices.
`timescale 1ns / 1ps
module ropuf_top
  import ropuf_pkg::*;
#(
  parameter int unsigned M             = 32,
  parameter int unsigned T_ON_CYCLES   = 12287,
  parameter int unsigned CLR_CYCLES    = 2,
  parameter int unsigned SETTLE_CYCLES = 4,
  parameter int unsigned COUNT_W       = 16,
  parameter int unsigned N             = M / 2,
  parameter int unsigned SEL_W         = group_sel_w(M / 2),
  parameter int unsigned W             = 2 * SEL_W,
  parameter int unsigned UG_HALF_PS [N] = '{1143, 1224, 1180, 1219, 1139, 1242, 1233, 1167,
                                            1266, 1201, 1228, 1197, 1163, 1159, 1171, 1206},
  parameter int unsigned LG_HALF_PS [N] = '{1155, 1147, 1237, 1193, 1151, 1184, 1215, 1251,
                                            1188, 1256, 1261, 1131, 1210, 1247, 1135, 1176}
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [W-1:0]       seed,
  output logic               resp,
  output logic               resp_valid,
  output logic [W-1:0]       challenge,
  output logic [COUNT_W-1:0] count_up,
  output logic [COUNT_W-1:0] count_dn,
  output logic               busy,
  output logic               done
);

  logic ro_en, cnt_clr, lfsr_load, lfsr_step, r;
  logic ug_ro, lg_ro;
  logic [W-1:0] c_state;

  challenge_lfsr #(.W(W)) u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (lfsr_load),
    .seed  (seed),
    .step  (lfsr_step),
    .state (c_state)
  );

  ro_group #(.N(N), .SEL_W(SEL_W), .HALF_PS(UG_HALF_PS)) u_upper (
    .en     (ro_en),
    .sel    (c_state[SEL_W-1:0]),
    .ro_sel (ug_ro)
  );

  ro_group #(.N(N), .SEL_W(SEL_W), .HALF_PS(LG_HALF_PS)) u_lower (
    .en     (ro_en),
    .sel    (c_state[W-1:SEL_W]),
    .ro_sel (lg_ro)
  );

  pulse_counter #(.W(COUNT_W)) u_cnt_up (
    .ro_clk (ug_ro),
    .clr    (cnt_clr),
    .en     (ro_en),
    .count  (count_up)
  );

  pulse_counter #(.W(COUNT_W)) u_cnt_dn (
    .ro_clk (lg_ro),
    .clr    (cnt_clr),
    .en     (ro_en),
    .count  (count_dn)
  );

  count_comparator #(.W(COUNT_W)) u_cmp (
    .count_up (count_up),
    .count_dn (count_dn),
    .r        (r)
  );

  puf_controller #(
    .W             (W),
    .T_ON_CYCLES   (T_ON_CYCLES),
    .CLR_CYCLES    (CLR_CYCLES),
    .SETTLE_CYCLES (SETTLE_CYCLES)
  ) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .r          (r),
    .ro_en      (ro_en),
    .cnt_clr    (cnt_clr),
    .lfsr_load  (lfsr_load),
    .lfsr_step  (lfsr_step),
    .resp       (resp),
    .resp_valid (resp_valid),
    .busy       (busy),
    .done       (done)
  );

  // The challenge reported with a response bit is the one that produced it:
  // the LFSR steps only after resp_valid.
  assign challenge = c_state;

endmodule
