// vd_traceback -- trace-back of the survivor path of a whole frame.
//
// Starting from END_STATE (state 0, reached by the zero tail) at the last
// stage, the unit walks back one stage at a time.  At stage t in state S the
// decoded bit is the state's least significant bit (odd state: 1, even
// state: 0), and the survivor bit b = surv[t][S] gives the previous state
// {b, S[5:1]}: S_{j+32} when b = 1 (upper branch), S_j when b = 0.
//
// The walk over all N_STAGE stages is one combinational chain of 64-to-1
// multiplexers, so the whole frame is traced in the single clock in which
// the parallel-to-serial register samples decoded.  Nothing here is
// clocked.  Because the walk starts in state 0, the last six decoded bits
// (the tail) are constant zeros; synthesis removes their logic.
//
// The decision rule and the start state follow the source design; writing
// the trace-back as one combinational chain is this design's own reading of
// its one-clock trace-back.
module vd_traceback
  import vd_pkg::*;
#(
  parameter int unsigned N_STAGE   = FRAME_LEN,
  parameter int unsigned END_STATE = 0
) (
  input  logic [NSTATES-1:0] surv [N_STAGE],  // survivor registers
  output logic [N_STAGE-1:0] decoded          // bit t = decoded bit of stage t
);
  state_t st [N_STAGE+1];   // st[t+1]: state after stage t

  always_comb begin
    st[N_STAGE] = state_t'(END_STATE);
    for (int t = N_STAGE - 1; t >= 0; t--) begin
      decoded[t] = st[t+1][0];
      st[t]      = {surv[t][st[t+1]], st[t+1][M-1:1]};
    end
  end
endmodule
