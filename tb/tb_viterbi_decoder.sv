// tb_viterbi_decoder -- end-to-end test of the decoder at its default size.
//
// Frames of 34 random information bits plus the 6-bit zero tail are
// encoded with the reference K = 7, rate 1/2 encoder and sent one code pair
// per clock.  Three channel conditions are mixed:
//   clean  - no errors: the output must equal the information bits;
//   7err   - seven code bits inverted, spread over the frame: the output
//            must still equal the information bits (error correction);
//   noisy  - every code bit inverted with probability 1/8: the output must
//            equal the reference decoder's output bit for bit.
// Every frame is also compared with the reference decoder.  The first part
// runs frames back to back (continuous input), where the latency from a
// code pair to its decoded bit must be FRAME_LEN clocks (from the edge that
// accepts the pair to the edge that puts its bit out) and the output must
// not pause; the second part drops sym_valid at random.
// Mechanisms counted: frames traced back, one-clock trace-back enables,
// corrected frames, idle input clocks, continuous output across frames.
module tb_viterbi_decoder;
  import vd_pkg::*;
  import vd_tb_pkg::*;

  localparam int N_CONT = 24;          // back-to-back frames
  localparam int N_GAP  = 12;          // frames with idle clocks
  localparam int N_FR   = N_CONT + N_GAP;
  localparam int LAT    = FRAME_LEN;       // clocks from accepting edge to output edge

  logic clk = 0, rst_n = 0, sym_valid = 0;
  code_t sym = '0;
  logic dec_bit, dec_valid, frame_done;

  viterbi_decoder dut (.clk(clk), .rst_n(rst_n), .sym_valid(sym_valid), .sym(sym),
                       .dec_bit(dec_bit), .dec_valid(dec_valid), .frame_done(frame_done));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int edge_n = 0;
  int n_tb_en = 0, n_corrected = 0, n_idle = 0, n_seamless = 0, n_err_frames = 0;

  logic [FRAME_LEN-1:0] info_q [$];    // information bits per frame
  logic [FRAME_LEN-1:0] ref_q  [$];    // reference decoder output per frame
  int                   kind_q [$];    // 0 clean, 1 7err, 2 noisy
  int                   t0_q   [$];    // accepting edge of stage 0

  always @(posedge clk) edge_n++;

  // ---------------- stimulus ----------------
  initial begin : drive
    logic [6:0] sr;
    sr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < N_FR; f++) begin
      logic [FRAME_LEN-1:0] info;
      logic [1:0] tx [FRAME_LEN];
      logic [1:0] rx [];
      int kind;
      rx   = new[FRAME_LEN];
      info = {$urandom, $urandom};
      info[FRAME_LEN-1 -: M] = '0;             // zero tail
      kind = f % 3;
      for (int t = 0; t < FRAME_LEN; t++) tx[t] = enc_step(sr, info[t]);
      for (int t = 0; t < FRAME_LEN; t++) rx[t] = tx[t];
      if (kind == 1) begin
        // seven single-bit errors, 11 code bits apart, random start
        int p0;
        p0 = $urandom_range(0, 9);
        for (int e = 0; e < 7; e++) begin
          int p;
          p = p0 + 11 * e;
          rx[p / 2][1 - (p % 2)] ^= 1'b1;
        end
      end else if (kind == 2) begin
        for (int t = 0; t < FRAME_LEN; t++)
          for (int b = 0; b < 2; b++)
            if ($urandom_range(0, 7) == 0) rx[t][b] ^= 1'b1;
      end
      if (kind != 0) n_err_frames++;
      info_q.push_back(info);
      ref_q.push_back(FRAME_LEN'(ref_decode(rx, FRAME_LEN)));
      kind_q.push_back(kind);
      for (int t = 0; t < FRAME_LEN; t++) begin
        if (f >= N_CONT) begin
          while ($urandom_range(0, 3) == 0) begin
            sym_valid = 0; sym = 2'($urandom);
            n_idle++;
            @(posedge clk); #1;
          end
        end
        if (t == 0) t0_q.push_back(edge_n + 1);   // edge that accepts it
        sym_valid = 1;
        sym       = rx[t];
        @(posedge clk); #1;
      end
    end
    sym_valid = 0;
  end

  // ---------------- checking ----------------
  // Outputs are sampled on the falling edge, half a clock after the rising
  // edge that produced them; edge_n numbers the rising edges.
  always @(posedge clk) if (rst_n && frame_done) n_tb_en++;

  initial begin : check
    int fr_done, nbits, first_edge;
    logic prev_valid;
    logic [FRAME_LEN-1:0] got;
    fr_done = 0; nbits = 0; prev_valid = 0; first_edge = 0;
    while (fr_done < N_FR) begin
      @(negedge clk);
      if (rst_n && dec_valid) begin
        if (nbits == 0) begin
          first_edge = edge_n;
          if (fr_done > 0 && fr_done < N_CONT) begin
            // continuous input: this frame's first bit follows the last one
            checks++;
            if (prev_valid) n_seamless++;
            else begin failures++; $display("FAIL gap in output before frame %0d", fr_done); end
          end
        end
        got[nbits] = dec_bit;
        nbits++;
        if (nbits == FRAME_LEN) begin
          logic [FRAME_LEN-1:0] info, refd;
          int kind, t0;
          info = info_q.pop_front();
          refd = ref_q.pop_front();
          kind = kind_q.pop_front();
          t0   = t0_q.pop_front();
          checks++;
          if (got !== refd) begin
            failures++;
            $display("FAIL frame %0d kind %0d got %h ref %h", fr_done, kind, got, refd);
          end
          if (kind != 2) begin
            checks++;
            if (got !== info) begin
              failures++;
              $display("FAIL frame %0d kind %0d got %h sent %h", fr_done, kind, got, info);
            end else if (kind == 1) n_corrected++;
          end
          if (fr_done < N_CONT) begin
            checks++;
            if (first_edge - t0 != LAT) begin
              failures++;
              $display("FAIL frame %0d latency %0d want %0d", fr_done, first_edge - t0, LAT);
            end
          end
          fr_done++;
          nbits = 0;
        end
      end else if (rst_n && nbits != 0) begin
        checks++;
        failures++;
        $display("FAIL output paused inside frame %0d", fr_done);
      end
      prev_valid = dec_valid;
    end
    repeat (5) @(posedge clk);
    // every mechanism must have happened
    checks++; if (n_tb_en != N_FR) begin failures++; $display("FAIL %0d trace-back enables for %0d frames", n_tb_en, N_FR); end
    checks++; if (n_corrected == 0) begin failures++; $display("FAIL no 7-error frame corrected"); end
    checks++; if (n_idle == 0) begin failures++; $display("FAIL no idle input clock"); end
    checks++; if (n_seamless == 0) begin failures++; $display("FAIL no seamless frame boundary"); end
    $display("frames=%0d trace_back_enables=%0d error_frames=%0d corrected_7err=%0d idle_clocks=%0d seamless_boundaries=%0d",
             N_FR, n_tb_en, n_err_frames, n_corrected, n_idle, n_seamless);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
