// vd_isus -- information sequence updating and storage (survivor memory).
//
// FRAME_LEN registers of NSTATES bits each hold the survivor bits of one
// frame: register i receives the 64 decisions of trellis stage i.  A
// FRAME_LEN-bit one-hot ring counter selects the register of the current
// stage; only that register is clocked, all others keep their contents.
// Once written, a register is not touched again until the same stage of the
// next frame, which is what keeps the switching activity low.
//
// The per-register clock gate is written as a clock enable (the ring counter
// bit ANDed with sym_valid), the form FPGA tools map onto the flip-flops'
// enable pins and ASIC tools turn into integrated clock-gating cells.
//
// Outputs: the whole store for the trace-back unit, and the ring counter,
// whose bit 0 marks the first and bit FRAME_LEN-1 the last stage of a frame.
// The register organisation and the one-register-per-stage clocking follow
// the source design; expressing the gate as an enable is this design's own.
module vd_isus
  import vd_pkg::*;
#(
  parameter int unsigned N_STAGE = FRAME_LEN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sym_valid,             // a stage is taken
  input  logic [NSTATES-1:0] decisions,             // survivor bits of it
  output logic [NSTATES-1:0] surv [N_STAGE],        // survivor registers
  output logic [N_STAGE-1:0] slot                   // current stage, one-hot
);
  logic [N_STAGE-1:0] clk_en;

  vd_ring_counter #(.N(N_STAGE)) u_ring (
    .clk     (clk),
    .rst_n   (rst_n),
    .advance (sym_valid),
    .slot    (slot)
  );

  assign clk_en = slot & {N_STAGE{sym_valid}};

  for (genvar i = 0; i < N_STAGE; i++) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         surv[i] <= '0;
      else if (clk_en[i]) surv[i] <= decisions;
    end
  end
endmodule
