// tb_vd_bmc -- exhaustive test of the branch metric computer: all 16
// (received, expected) code pairs against the Hamming distance.
module tb_vd_bmc;
  import vd_pkg::*;
  code_t rx, expected;
  bm_t   bm;
  int checks = 0, failures = 0;

  vd_bmc dut (.rx(rx), .expected(expected), .bm(bm));

  initial begin
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++) begin
        int want;
        rx = 2'(a); expected = 2'(b);
        #1;
        want = ((a ^ b) & 1) + (((a ^ b) >> 1) & 1);
        checks++;
        if (int'(bm) != want) begin
          failures++;
          $display("FAIL rx=%b exp=%b bm=%0d want=%0d", rx, expected, bm, want);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
