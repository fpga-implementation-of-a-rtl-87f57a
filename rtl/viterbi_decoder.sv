// viterbi_decoder -- hard-decision Viterbi decoder for the WiMAX K = 7,
// rate 1/2 convolutional code, with frame-wise trace-back.
//
// Data path: vd_pmu (64 ACS units, each with its two branch metric
// computers, plus the path metric registers) -> vd_isus (40 x 64-bit
// survivor registers, one clocked per stage by a one-hot ring counter) ->
// vd_traceback (combinational trace-back of the whole frame from state 0)
// -> vd_psi (40-bit parallel-to-serial register).
//
// Interface: one hard-decision code pair per clock on sym with sym_valid
// high; sym_valid may drop between pairs.  Frames are FRAME_LEN = 40 pairs
// long, back to back, and the first pair after reset starts a frame.  Each
// frame must end with the six zero tail bits, so that the encoder is in
// state 0 at its end and start.  Decoded bits leave on dec_bit with dec_valid
// high, stage 0 of a frame first, one per clock.
//
// Timing: the trace-back runs only in the single clock after the last pair
// of a frame was taken (tb_en, also visible as frame_done); the PSI samples
// its result on the next clock edge.  With continuous input, the decoded bit
// of stage t leaves on the clock edge FRAME_LEN = 40 edges after the edge
// that accepted its code pair, and the output stream has no gaps.
//
// Follows the paper: the block chain, one ACS per state, 40 x 64-bit
// survivor registers selected by a 40-bit ring counter, trace-back from
// state 0 once per frame, the 40-bit PSI and the 40-clock delay.  Own
// choices: the sym_valid strobe, the fixed tie rule in the ACS, the path
// metric width and restart values, and clock enables in place of gated
// clocks.  The path metrics are not brought out; only the unit test reads
// them.
module viterbi_decoder
  import vd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sym_valid,   // sym holds a code pair
  input  code_t      sym,         // {out1 (G1 = 171), out2 (G2 = 133)}
  output logic       dec_bit,     // decoded information bit
  output logic       dec_valid,
  output logic       frame_done   // trace-back enabled in this clock
);
  logic [NSTATES-1:0]   decisions;
  pm_t                  pm   [NSTATES];
  logic [NSTATES-1:0]   surv [FRAME_LEN];
  logic [FRAME_LEN-1:0] slot;
  logic [FRAME_LEN-1:0] decoded;
  logic                 tb_en;

  vd_pmu u_pmu (
    .clk         (clk),
    .rst_n       (rst_n),
    .sym_valid   (sym_valid),
    .frame_first (slot[0]),
    .rx          (sym),
    .decisions   (decisions),
    .pm          (pm)
  );

  vd_isus #(.N_STAGE(FRAME_LEN)) u_isus (
    .clk       (clk),
    .rst_n     (rst_n),
    .sym_valid (sym_valid),
    .decisions (decisions),
    .surv      (surv),
    .slot      (slot)
  );

  // Enable the trace-back for one clock once the frame is complete.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tb_en <= 1'b0;
    else        tb_en <= sym_valid & slot[FRAME_LEN-1];
  end

  vd_traceback #(.N_STAGE(FRAME_LEN), .END_STATE(0)) u_tb (
    .surv    (surv),
    .decoded (decoded)
  );

  vd_psi #(.N(FRAME_LEN)) u_psi (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (tb_en),
    .par_in    (decoded),
    .out_bit   (dec_bit),
    .out_valid (dec_valid)
  );

  assign frame_done = tb_en;
endmodule
