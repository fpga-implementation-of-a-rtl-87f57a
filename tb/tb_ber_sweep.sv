// tb_ber_sweep -- bit error rate of the decoder over a binary symmetric
// channel.
//
// For four channel bit error probabilities (1/64, 1/32, 1/16, 1/8) the test
// sends FRAMES_PER_POINT back-to-back frames of 34 random information bits
// plus the zero tail, inverting each code bit at random with that
// probability.  Every decoded frame must equal the reference decoder's
// output.  The decoded BER (over the 34 information bits of each frame) is
// printed next to the channel BER, and for the three lower probabilities it
// must be smaller than the channel BER: the coding gain of the decoder.
module tb_ber_sweep;
  import vd_pkg::*;
  import vd_tb_pkg::*;

  localparam int FRAMES_PER_POINT = 1000;
  localparam int NPT = 4;
  localparam int INV_P [NPT] = '{64, 32, 16, 8};   // p = 1 / INV_P
  localparam int N_INFO = FRAME_LEN - M;

  logic clk = 0, rst_n = 0, sym_valid = 0;
  code_t sym = '0;
  logic dec_bit, dec_valid, frame_done;
  int checks = 0, failures = 0;

  viterbi_decoder dut (.clk(clk), .rst_n(rst_n), .sym_valid(sym_valid), .sym(sym),
                       .dec_bit(dec_bit), .dec_valid(dec_valid), .frame_done(frame_done));

  always #5 clk = ~clk;

  logic [FRAME_LEN-1:0] info_q [$];
  logic [FRAME_LEN-1:0] ref_q  [$];
  int                   pt_q   [$];
  int chan_err [NPT], chan_bits [NPT], dec_err [NPT], dec_bits [NPT];

  initial begin : drive
    logic [6:0] sr;
    logic [1:0] rx [];
    rx = new[FRAME_LEN];
    sr = '0;
    for (int i = 0; i < NPT; i++) begin chan_err[i] = 0; chan_bits[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int pt = 0; pt < NPT; pt++)
      for (int f = 0; f < FRAMES_PER_POINT; f++) begin
        logic [FRAME_LEN-1:0] info;
        info = {$urandom, $urandom};
        info[FRAME_LEN-1 -: M] = '0;
        for (int t = 0; t < FRAME_LEN; t++) begin
          rx[t] = enc_step(sr, info[t]);
          for (int b = 0; b < 2; b++) begin
            chan_bits[pt]++;
            if ($urandom_range(0, INV_P[pt] - 1) == 0) begin
              rx[t][b] ^= 1'b1;
              chan_err[pt]++;
            end
          end
        end
        info_q.push_back(info);
        ref_q.push_back(FRAME_LEN'(ref_decode(rx, FRAME_LEN)));
        pt_q.push_back(pt);
        for (int t = 0; t < FRAME_LEN; t++) begin
          sym_valid = 1; sym = rx[t];
          @(posedge clk); #1;
        end
      end
    sym_valid = 0;
  end

  initial begin : check
    int nfr, n;
    logic [FRAME_LEN-1:0] got;
    for (int i = 0; i < NPT; i++) begin dec_err[i] = 0; dec_bits[i] = 0; end
    nfr = 0; n = 0;
    while (nfr < NPT * FRAMES_PER_POINT) begin
      @(negedge clk);
      if (!(rst_n && dec_valid)) continue;
      got[n] = dec_bit;
      n++;
      if (n == FRAME_LEN) begin
        logic [FRAME_LEN-1:0] info, refd;
        int pt;
        info = info_q.pop_front();
        refd = ref_q.pop_front();
        pt   = pt_q.pop_front();
        checks++;
        if (got !== refd) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d got %h ref %h", nfr, got, refd);
        end
        for (int t = 0; t < N_INFO; t++) begin
          dec_bits[pt]++;
          if (got[t] != info[t]) dec_err[pt]++;
        end
        n = 0;
        nfr++;
      end
    end
    $display("channel p   channel BER   decoded BER");
    for (int pt = 0; pt < NPT; pt++) begin
      real cb, db;
      cb = real'(chan_err[pt]) / real'(chan_bits[pt]);
      db = real'(dec_err[pt]) / real'(dec_bits[pt]);
      $display("1/%-3d       %.5f       %.5f", INV_P[pt], cb, db);
      if (pt < NPT - 1) begin
        checks++;
        if (!(db < cb)) begin failures++; $display("FAIL no coding gain at p = 1/%0d", INV_P[pt]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPT * FRAMES_PER_POINT * FRAME_LEN + 500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
