// vd_psi -- parallel-to-serial interface for the decoded frame.
//
// An N-bit shift register.  On load it takes the N decoded bits of a frame;
// then it shifts one bit out per clock, stage 0 first, with out_valid high
// for exactly N clocks.  A load while bits are still going out restarts the
// register with the new frame.  With frames arriving back to back (one code
// pair per clock) the next load comes just as the last bit leaves, so the
// output is a continuous bit stream.  The 40-bit parallel-to-serial register
// is the source design's; bit order, out_valid and the bit counter are this
// design's own.
module vd_psi #(
  parameter int unsigned N = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,        // sample par_in
  input  logic [N-1:0] par_in,      // bit 0 goes out first
  output logic         out_bit,
  output logic         out_valid
);
  localparam int CW = $clog2(N + 1);

  logic [N-1:0]  sr;
  logic [CW-1:0] left;              // bits still to send

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr   <= '0;
      left <= '0;
    end else if (load) begin
      sr   <= par_in;
      left <= CW'(N);
    end else if (left != 0) begin
      sr   <= sr >> 1;
      left <= left - 1'b1;
    end
  end

  assign out_bit   = sr[0];
  assign out_valid = (left != 0);
endmodule
