// tb_vd_psi -- parallel-to-serial register.  Loads random 40-bit words with
// one or several idle clocks between them, and once in the middle of a word;
// checks the bit order (bit 0 first), that out_valid lasts exactly 40
// clocks, and the restart on load.  Loads exactly as the last bit leaves are
// exercised by the end-to-end test.
module tb_vd_psi;
  localparam int N = 40;
  logic clk = 0, rst_n = 0, load = 0;
  logic [N-1:0] par_in = '0;
  logic out_bit, out_valid;
  int checks = 0, failures = 0;

  vd_psi #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .load(load), .par_in(par_in),
                       .out_bit(out_bit), .out_valid(out_valid));

  always #5 clk = ~clk;

  task automatic send_word(input logic [N-1:0] w, input int nbits);
    // load w, then watch nbits bits go out
    par_in = w; load = 1;
    @(posedge clk); #1 load = 0;
    for (int i = 0; i < nbits; i++) begin
      checks++;
      if (!out_valid || out_bit !== w[i]) begin
        failures++;
        if (failures < 10) $display("FAIL bit %0d got %b/%b want %b", i, out_bit, out_valid, w[i]);
      end
      if (i < nbits - 1) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (out_valid) failures++;
    for (int k = 0; k < 6; k++) begin
      logic [N-1:0] w;
      w = {$urandom, $urandom};
      if (k == 3) begin
        send_word(w, 17);       // interrupted by the next load
        @(posedge clk); #1;     // output 17 of this word
        continue;
      end
      send_word(w, N);
      if (k % 2 == 1) begin
        // let it run dry: valid must drop right after bit N-1
        @(posedge clk); #1;
        checks++;
        if (out_valid) begin failures++; $display("FAIL valid longer than %0d clocks", N); end
        repeat (3) @(posedge clk);
        #1;
      end else begin
        @(posedge clk); #1;     // back to back: next load in this clock
        checks++;
        if (out_valid) begin failures++; $display("FAIL valid longer than %0d clocks", N); end
      end
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
