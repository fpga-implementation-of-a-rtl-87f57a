// vd_pkg -- constants and trellis helpers shared by the Viterbi decoder.
//
// The code is the WiMAX (IEEE 802.16) mandatory convolutional code:
// constraint length K = 7, rate 1/2, so the trellis has 2^(K-1) = 64 states.
// A frame is 40 trellis stages long and its last K-1 = 6 information bits are
// the zero tail, so every frame starts and ends in state 0.
//
// State numbering follows the decision rule of the trace-back unit: a state
// holds the last six input bits with the newest bit in bit 0.  Entering
// state S_{2j} or S_{2j+1} is possible from S_j (the "lower" branch, oldest
// bit 0) or from S_{j+32} (the "upper" branch, oldest bit 1).  The new input
// bit is therefore the least significant bit of the state it leads to.
//
// The generator polynomials 171 and 133 (octal) are those of the 802.16
// standard; the code pair of a branch is {out1, out2} with out1 from 171.
package vd_pkg;

  localparam int K         = 7;            // constraint length
  localparam int M         = K - 1;        // encoder memory
  localparam int NSTATES   = 1 << M;       // trellis states (64)
  localparam int FRAME_LEN = 40;           // trellis stages per frame
  localparam int PM_W      = 8;            // path metric width
  localparam int BM_W      = 2;            // branch metric width (0..2)

  // Generator polynomials, bit 6 = current input, bit 0 = oldest stored bit.
  localparam logic [K-1:0] G1 = 7'o171;
  localparam logic [K-1:0] G2 = 7'o133;

  // Path metric given to every state but state 0 at the start of a frame.
  // It exceeds any metric a path from state 0 can reach in one frame
  // (2 * FRAME_LEN = 80) and leaves headroom: 128 + 80 < 2^PM_W.
  localparam logic [PM_W-1:0] PM_INF = PM_W'(128);

  typedef logic [M-1:0]    state_t;
  typedef logic [1:0]      code_t;       // {out1, out2}
  typedef logic [PM_W-1:0] pm_t;
  typedef logic [BM_W-1:0] bm_t;

  // Code pair the encoder emits when it is in state `prev` and takes input
  // `u`.  The encoder shift register, newest first, is {u, prev[0], ...,
  // prev[5]}; generator bit 6 taps u and bit (5-i) taps prev[i].
  function automatic code_t branch_code(state_t prev, logic u);
    logic [K-1:0] sr;
    sr = {u, prev[0], prev[1], prev[2], prev[3], prev[4], prev[5]};
    return {^(sr & G1), ^(sr & G2)};
  endfunction

endpackage
