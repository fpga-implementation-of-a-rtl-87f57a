// vd_bmc -- branch metric computer for one trellis branch.
//
// The branch metric is the Hamming distance between the hard-decision code
// pair received for this stage and the code pair the branch would have
// produced: the two are XORed bit by bit and the ones are counted.  This is
// the dashed box of the ACS diagram (XOR, then "count the number of 1's").
// Purely combinational; the result is 0, 1 or 2.  The XOR-and-count
// structure follows the source design; hard decisions are this design's
// choice (no soft metric table).
module vd_bmc
  import vd_pkg::*;
(
  input  code_t rx,        // received code pair {out1, out2}
  input  code_t expected,  // code pair of the branch
  output bm_t   bm         // Hamming distance, 0..2
);
  code_t diff;
  always_comb begin
    diff = rx ^ expected;
    bm   = bm_t'(diff[1]) + bm_t'(diff[0]);
  end
endmodule
