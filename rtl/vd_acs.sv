// vd_acs -- add-compare-select unit for one trellis state.
//
// The unit merges branch metric computation and ACS into one wing of a
// trellis butterfly.  For its state S it holds the two predecessors
// S_{j+32} ("upper") and S_j ("lower"), computes each branch metric with a
// vd_bmc, adds it to that predecessor's path metric and keeps the smaller
// sum.  The survivor bit sent to the survivor store is 1 when the upper
// branch wins and 0 when the lower one does.  On equal sums the lower branch
// is kept (a fixed rule in place of a random pick).
//
// The expected code pairs are constants worked out from the state number
// STATE, so each of the 64 instances is specialised at elaboration time.
// Purely combinational.  The structure (two branch metrics, two adders, one
// comparator) follows the source design; the tie rule is this design's own.
module vd_acs
  import vd_pkg::*;
#(
  parameter int unsigned STATE = 0       // trellis state this unit updates
) (
  input  code_t rx,        // received code pair
  input  pm_t   pm_upper,  // path metric of S_{j+32}
  input  pm_t   pm_lower,  // path metric of S_j
  output pm_t   pm_new,    // updated path metric of STATE
  output logic  decision   // 1: upper branch survives, 0: lower
);
  localparam state_t CUR      = state_t'(STATE);
  localparam state_t PREV_UP  = {1'b1, CUR[M-1:1]};
  localparam state_t PREV_LO  = {1'b0, CUR[M-1:1]};
  localparam code_t  CODE_UP  = branch_code(PREV_UP, CUR[0]);
  localparam code_t  CODE_LO  = branch_code(PREV_LO, CUR[0]);

  bm_t bm_up, bm_lo;
  pm_t sum_up, sum_lo;

  vd_bmc u_bmc_up (.rx(rx), .expected(CODE_UP), .bm(bm_up));
  vd_bmc u_bmc_lo (.rx(rx), .expected(CODE_LO), .bm(bm_lo));

  always_comb begin
    sum_up   = pm_upper + pm_t'(bm_up);
    sum_lo   = pm_lower + pm_t'(bm_lo);
    decision = (sum_up < sum_lo);
    pm_new   = decision ? sum_up : sum_lo;
  end
endmodule
