// vd_tb_pkg -- reference models used by the decoder testbenches.
//
// Written independently of the RTL: the encoder is a plain 7-bit shift
// register with the 802.16 taps (171, 133 octal), and the reference decoder
// runs the Viterbi algorithm forward over explicit (state, input) pairs and
// keeps the survivor paths by register exchange, not by trace-back.  Ties
// are resolved the way the RTL documents it: the predecessor whose oldest bit
// is 0 is kept.
package vd_tb_pkg;

  localparam int NS  = 64;
  localparam int INF = 128;

  // Encoder: sr[6] is the newest bit.  Returns {out1, out2}.
  function automatic logic [1:0] enc_step(ref logic [6:0] sr, input logic u);
    logic [6:0] g1, g2;
    g1 = 7'b1111001;   // 171 octal
    g2 = 7'b1011011;   // 133 octal
    sr = {u, sr[6:1]};
    return {^(sr & g1), ^(sr & g2)};
  endfunction

  // Expected code pair of the branch leaving integer state p with input u.
  // State p holds the last six bits, newest in bit 0.
  function automatic logic [1:0] ref_code(int p, logic u);
    logic [6:0] sr;
    sr = {p[0], p[1], p[2], p[3], p[4], p[5], 1'b0};
    return enc_step(sr, u);
  endfunction

  function automatic int hamming(logic [1:0] a, logic [1:0] b);
    return int'(a[1] ^ b[1]) + int'(a[0] ^ b[0]);
  endfunction

  // One trellis stage in the forward direction.  pm: metrics in, updated in
  // place.  dec[n] = 1 when the survivor into n came from a state >= 32.
  function automatic void ref_stage(ref int pm[NS], input logic [1:0] rx,
                                    output logic [NS-1:0] dec);
    int nm[NS];
    for (int n = 0; n < NS; n++) nm[n] = -1;
    dec = '0;
    // Visit the lower predecessors (p < 32) first so that on a tie they stay.
    for (int p = 0; p < NS; p++) begin
      for (int u = 0; u < 2; u++) begin
        int n, c;
        n = ((p * 2) % NS) + u;
        c = pm[p] + hamming(rx, ref_code(p, 1'(u)));
        if (nm[n] < 0 || c < nm[n]) begin
          nm[n]  = c;
          dec[n] = (p >= NS/2);
        end
      end
    end
    for (int n = 0; n < NS; n++) pm[n] = nm[n];
  endfunction

  // Full-frame reference decoder by register exchange; frame starts and ends
  // in state 0.  rx[t] is the code pair of stage t; returns decoded bits.
  function automatic logic [63:0] ref_decode(input logic [1:0] rx[], input int len);
    int pm[NS];
    logic [63:0] path[NS], npath[NS];
    logic [NS-1:0] dec;
    for (int s = 0; s < NS; s++) begin pm[s] = (s == 0) ? 0 : INF; path[s] = '0; end
    for (int t = 0; t < len; t++) begin
      ref_stage(pm, rx[t], dec);
      for (int n = 0; n < NS; n++) begin
        int p;
        p = (n / 2) + (dec[n] ? NS/2 : 0);
        npath[n]    = path[p];
        npath[n][t] = n[0];
      end
      path = npath;
    end
    return path[0];
  endfunction

endpackage
