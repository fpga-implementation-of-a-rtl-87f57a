// vd_ring_counter -- one-hot ring counter that tracks the trellis stage.
//
// N flip-flops hold a single 1 that moves one place up on every clock with
// advance high and wraps from bit N-1 back to bit 0.  The position of the 1
// is the number of code pairs received so far in the current frame, so bit i
// enables the survivor register of stage i.  Reset puts the 1 in bit 0.
// The 40-bit ring counter is the source design's; advancing only on valid
// pairs is this design's own addition.
module vd_ring_counter #(
  parameter int unsigned N = 40          // stages per frame
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         advance,          // a code pair was accepted
  output logic [N-1:0] slot              // one-hot stage position
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       slot <= N'(1);
    else if (advance) slot <= {slot[N-2:0], slot[N-1]};
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(slot));
endmodule
