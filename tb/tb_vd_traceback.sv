// tb_vd_traceback -- random survivor stores, plus stores built from a known
// state path, against a trace-back written with integer state arithmetic
// (previous state = b * 32 + S / 2, decoded bit = S mod 2).
module tb_vd_traceback;
  import vd_pkg::*;
  localparam int N = FRAME_LEN;
  logic [NSTATES-1:0] surv [N];
  logic [N-1:0] decoded;
  int checks = 0, failures = 0;

  vd_traceback dut (.surv(surv), .decoded(decoded));

  initial begin
    for (int it = 0; it < 300; it++) begin
      logic [N-1:0] want;
      int s;
      for (int t = 0; t < N; t++) surv[t] = {$urandom, $urandom};
      if (it % 2 == 1) begin
        // plant a path of random bits ending in six zeros; its survivor
        // bits must make the trace-back return exactly these bits
        logic [N-1:0] bits;
        int st [N+1];
        bits = {$urandom, $urandom};
        bits[N-1 -: 6] = '0;
        st[0] = 0;
        for (int t = 0; t < N; t++) begin
          st[t+1] = ((st[t] * 2) % 64) + int'(bits[t]);
          surv[t][st[t+1]] = (st[t] >= 32);
        end
        #1;
        checks++;
        if (decoded !== bits) begin failures++; $display("FAIL planted %h got %h", bits, decoded); end
      end
      s = 0;
      for (int t = N - 1; t >= 0; t--) begin
        want[t] = 1'(s % 2);
        s = (surv[t][s] ? 32 : 0) + s / 2;
      end
      #1;
      checks++;
      if (decoded !== want) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d got %h want %h", it, decoded, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
