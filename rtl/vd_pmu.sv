// vd_pmu -- path metric updating and storage.
//
// One vd_acs per trellis state (64 in all) updates every path metric in the
// same clock, a fully parallel trellis stage.  The metrics live in a bank of
// PM_W-bit registers.  A stage is taken on every clock where sym_valid is
// high.  On the first stage of a frame (frame_first high) the ACS units do
// not read the stored metrics but the start-of-frame vector: 0 for state 0
// and PM_INF for every other state, because the zero tail of the previous
// frame has returned the encoder to state 0.
//
// Outputs: the 64 survivor bits of the current stage (combinational, bit s
// is the decision of state s, 1 = upper branch S_{j+32}) and the stored
// metrics.  Latency: the metrics of a stage are registered on the clock edge
// that accepts its code pair; the decisions are valid in the same cycle as
// the code pair.  One ACS per state follows the source design; the metric
// width, the per-frame restart values and the reset are this design's own.
module vd_pmu
  import vd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sym_valid,    // rx holds a code pair
  input  logic               frame_first,  // this pair is stage 0 of a frame
  input  code_t              rx,
  output logic [NSTATES-1:0] decisions,    // survivor bits of this stage
  output pm_t                pm [NSTATES]  // stored path metrics
);
  pm_t pm_in  [NSTATES];
  pm_t pm_nxt [NSTATES];

  always_comb begin
    for (int s = 0; s < NSTATES; s++)
      pm_in[s] = frame_first ? ((s == 0) ? '0 : PM_INF) : pm[s];
  end

  for (genvar s = 0; s < NSTATES; s++) begin : g_acs
    localparam int J = s / 2;   // S_{2j} and S_{2j+1} share predecessors
    vd_acs #(.STATE(s)) u_acs (
      .rx       (rx),
      .pm_upper (pm_in[J + NSTATES/2]),
      .pm_lower (pm_in[J]),
      .pm_new   (pm_nxt[s]),
      .decision (decisions[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTATES; s++) pm[s] <= (s == 0) ? '0 : PM_INF;
    end else if (sym_valid) begin
      for (int s = 0; s < NSTATES; s++) pm[s] <= pm_nxt[s];
    end
  end
endmodule
