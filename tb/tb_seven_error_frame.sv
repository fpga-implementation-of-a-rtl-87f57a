// tb_seven_error_frame -- one frame with a seven-bit error pattern.
//
// A single 40-stage frame (34 random information bits and the zero tail)
// is encoded, seven of its 80 code bits are inverted at fixed positions
// spread over the frame, and the decoder must return the information bits
// unchanged.  The first decoded bit must appear 40 clock edges after the
// edge that accepted the frame's first code pair, and the 40 bits must come
// out on consecutive clocks.  A second, error-free frame follows so that the
// frame boundary is crossed as well.
module tb_seven_error_frame;
  import vd_pkg::*;
  import vd_tb_pkg::*;

  localparam int ERR_POS [7] = '{4, 15, 26, 37, 48, 59, 70};  // code bit index

  logic clk = 0, rst_n = 0, sym_valid = 0;
  code_t sym = '0;
  logic dec_bit, dec_valid, frame_done;
  int checks = 0, failures = 0, edge_n = 0;

  viterbi_decoder dut (.clk(clk), .rst_n(rst_n), .sym_valid(sym_valid), .sym(sym),
                       .dec_bit(dec_bit), .dec_valid(dec_valid), .frame_done(frame_done));

  always #5 clk = ~clk;
  always @(posedge clk) edge_n++;

  logic [FRAME_LEN-1:0] info [2];
  int t0;

  initial begin : drive
    logic [6:0] sr;
    logic [1:0] rx;
    sr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      info[f] = {$urandom, $urandom};
      info[f][FRAME_LEN-1 -: M] = '0;
      for (int t = 0; t < FRAME_LEN; t++) begin
        rx = enc_step(sr, info[f][t]);
        if (f == 0)
          foreach (ERR_POS[e])
            if (ERR_POS[e] / 2 == t) rx[1 - (ERR_POS[e] % 2)] ^= 1'b1;
        if (f == 0 && t == 0) t0 = edge_n + 1;
        sym_valid = 1; sym = rx;
        @(posedge clk); #1;
      end
    end
    sym_valid = 0;
  end

  initial begin : check
    logic [FRAME_LEN-1:0] got;
    int first;
    wait (rst_n);
    for (int f = 0; f < 2; f++) begin
      do @(negedge clk); while (!dec_valid);
      first = edge_n;
      if (f == 0) begin
        checks++;
        if (first - t0 != FRAME_LEN) begin
          failures++; $display("FAIL latency %0d want %0d", first - t0, FRAME_LEN);
        end
      end
      for (int t = 0; t < FRAME_LEN; t++) begin
        if (t > 0) @(negedge clk);
        checks++;
        if (!dec_valid) begin failures++; $display("FAIL output paused at bit %0d", t); end
        got[t] = dec_bit;
      end
      checks++;
      if (got !== info[f]) begin
        failures++;
        $display("FAIL frame %0d decoded %h sent %h (errors at %h)", f, got, info[f], got ^ info[f]);
      end else
        $display("frame %0d: %0d code bit errors corrected, decoded %h", f, f == 0 ? 7 : 0, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
