// puf_controller: sequences the PUF through every challenge of one run.
//
// For each challenge it (1) holds the counters in clear for CLR_CYCLES,
// (2) raises EN for T_ON_CYCLES so the two selected oscillators run and the
// two counters count, (3) drops EN and waits SETTLE_CYCLES for the rings to
// stop and the counts to become static, (4) registers the comparator output
// as the response bit (resp_valid high for one cycle), then (5) steps the LFSR
// to the next challenge. After 2^W - 1 bits it pulses `done` and returns to
// idle, with the LFSR back at its seed and the last counts still readable
// (the counters are cleared again by the next start).
//
// Interface: `start` (one cycle, accepted in idle) loads the seed and begins;
// `busy` is high from then until `done`. Per bit the run takes
// CLR_CYCLES + T_ON_CYCLES + SETTLE_CYCLES + 2 cycles (the last bit one less),
// counted from the cycle after `start`.
// The paper shows a controller driving EN, the counters and the LFSR and
// fixes the enable window at 122.87 us (12287 cycles at 100 MHz, the clock
// being an assumption); the clear/settle phases and the handshake are this
// design's. Reset is asynchronous and active low. The counter clear is low
// while idle and rises at the start of every clear phase, so the counters see
// a clear edge for every bit whatever state they powered up in.
`timescale 1ns / 1ps
module puf_controller
  import ropuf_pkg::*;
#(
  parameter int unsigned W             = 8,
  parameter int unsigned T_ON_CYCLES   = 12287,
  parameter int unsigned CLR_CYCLES    = 2,
  parameter int unsigned SETTLE_CYCLES = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic r,
  output logic ro_en,
  output logic cnt_clr,
  output logic lfsr_load,
  output logic lfsr_step,
  output logic resp,
  output logic resp_valid,
  output logic busy,
  output logic done
);

  localparam int unsigned NUM_BITS = (1 << W) - 1;
  localparam int unsigned TMR_W    = $clog2(T_ON_CYCLES + CLR_CYCLES + SETTLE_CYCLES + 1);

  ctrl_state_t       state;
  logic [TMR_W-1:0]  timer;
  logic [W-1:0]      bit_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      timer      <= '0;
      bit_cnt    <= '0;
      ro_en      <= 1'b0;
      cnt_clr    <= 1'b0;
      lfsr_load  <= 1'b0;
      lfsr_step  <= 1'b0;
      resp       <= 1'b0;
      resp_valid <= 1'b0;
      busy       <= 1'b0;
      done       <= 1'b0;
    end else begin
      lfsr_load  <= 1'b0;
      lfsr_step  <= 1'b0;
      resp_valid <= 1'b0;
      done       <= 1'b0;
      case (state)
        ST_IDLE: begin
          if (start) begin
            lfsr_load <= 1'b1;
            busy      <= 1'b1;
            bit_cnt   <= '0;
            cnt_clr   <= 1'b1;
            timer     <= TMR_W'(CLR_CYCLES - 1);
            state     <= ST_CLEAR;
          end
        end
        ST_CLEAR: begin
          if (timer == '0) begin
            cnt_clr <= 1'b0;
            ro_en   <= 1'b1;
            timer   <= TMR_W'(T_ON_CYCLES - 1);
            state   <= ST_ENABLE;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        ST_ENABLE: begin
          if (timer == '0) begin
            ro_en <= 1'b0;
            timer <= TMR_W'(SETTLE_CYCLES - 1);
            state <= ST_SETTLE;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        ST_SETTLE: begin
          if (timer == '0) begin
            state <= ST_COMPARE;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        ST_COMPARE: begin
          resp       <= r;
          resp_valid <= 1'b1;
          if (bit_cnt == W'(NUM_BITS - 1)) begin
            busy    <= 1'b0;
            done    <= 1'b1;
            state   <= ST_IDLE;
          end else begin
            lfsr_step <= 1'b1;
            state     <= ST_STEP;
          end
        end
        ST_STEP: begin
          bit_cnt <= bit_cnt + 1'b1;
          cnt_clr <= 1'b1;
          timer   <= TMR_W'(CLR_CYCLES - 1);
          state   <= ST_CLEAR;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // EN and the counter clear are never active together.
  a_en_clr: assert property (@(posedge clk) disable iff (!rst_n) !(ro_en && cnt_clr));
  // The challenge only moves while the oscillators are stopped.
  a_step_idle: assert property (@(posedge clk) disable iff (!rst_n) lfsr_step |-> !ro_en);

  initial begin
    assert (CLR_CYCLES >= 1 && T_ON_CYCLES >= 1 && SETTLE_CYCLES >= 1)
      else $error("puf_controller: every phase needs at least one cycle");
  end

endmodule
