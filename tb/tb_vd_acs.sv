// tb_vd_acs -- add-compare-select unit for four trellis states (0, 1, 37,
// 63) with random path metrics and code pairs, including forced ties.  The
// expected result is built from the reference encoder in vd_tb_pkg.
module tb_vd_acs;
  import vd_pkg::*;
  import vd_tb_pkg::*;
  localparam int NT = 4;
  localparam int ST [NT] = '{0, 1, 37, 63};

  code_t rx;
  pm_t   pm_up, pm_lo;
  pm_t   pm_new [NT];
  logic  dec    [NT];
  int checks = 0, failures = 0, ties = 0;

  for (genvar i = 0; i < NT; i++) begin : g_dut
    vd_acs #(.STATE(ST[i])) dut (.rx(rx), .pm_upper(pm_up), .pm_lower(pm_lo),
                                 .pm_new(pm_new[i]), .decision(dec[i]));
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      rx    = 2'($urandom);
      pm_up = pm_t'($urandom_range(0, 100));
      pm_lo = (it % 4 == 0) ? pm_up : pm_t'($urandom_range(0, 100));
      #1;
      for (int i = 0; i < NT; i++) begin
        int s, cu, cl, want_pm;
        logic want_dec;
        s  = ST[i];
        cu = int'(pm_up) + hamming(rx, ref_code(32 + s / 2, 1'(s % 2)));
        cl = int'(pm_lo) + hamming(rx, ref_code(s / 2, 1'(s % 2)));
        if (cu == cl) ties++;
        want_dec = (cu < cl);
        want_pm  = want_dec ? cu : cl;
        checks++;
        if (dec[i] !== want_dec || int'(pm_new[i]) != want_pm) begin
          failures++;
          if (failures < 10)
            $display("FAIL state %0d rx=%b up=%0d lo=%0d got %0d/%b want %0d/%b",
                     s, rx, pm_up, pm_lo, pm_new[i], dec[i], want_pm, want_dec);
        end
      end
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no tie exercised"); end
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
