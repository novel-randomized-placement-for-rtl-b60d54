// ropuf_pkg: constants and helper functions shared by the ring oscillator PUF.
//
// The PUF holds M ring oscillators in two groups of M/2. One challenge picks
// one oscillator of each group, so a challenge has 2*log2(M/2) bits and a
// maximal-length LFSR of that width walks through 2^W - 1 challenges, one
// response bit each (15, 63, 255 and 1023 bits for M = 8, 16, 32, 64).
// The feedback polynomials below are standard maximal-length ones; the
// choice of polynomial is this design's, the paper only asks for a
// maximal-length LFSR.
`timescale 1ns / 1ps
package ropuf_pkg;

  // Select width of one group of n oscillators.
  function automatic int unsigned group_sel_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Challenge (LFSR) width for M oscillators in total.
  function automatic int unsigned challenge_w(input int unsigned m);
    return 2 * group_sel_w(m / 2);
  endfunction

  // Fibonacci XOR feedback mask: bit k set means stage k+1 is a tap.
  // Polynomials: x^2+x+1, x^4+x^3+1, x^6+x^5+1, x^8+x^6+x^5+x^4+1,
  // x^10+x^7+1, x^12+x^6+x^4+x+1, x^14+x^5+x^3+x+1, x^16+x^15+x^13+x^4+1.
  function automatic logic [15:0] lfsr_taps(input int unsigned w);
    case (w)
      2:       return 16'h0003;
      4:       return 16'h000C;
      6:       return 16'h0030;
      8:       return 16'h00B8;
      10:      return 16'h0240;
      12:      return 16'h0829;
      14:      return 16'h2015;
      16:      return 16'hD008;
      default: return 16'h0000;
    endcase
  endfunction

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE,
    ST_CLEAR,
    ST_ENABLE,
    ST_SETTLE,
    ST_COMPARE,
    ST_STEP
  } ctrl_state_t;

endpackage
