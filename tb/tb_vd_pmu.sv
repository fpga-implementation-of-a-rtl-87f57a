// tb_vd_pmu -- path metric unit over several frames of random code pairs
// with gaps in sym_valid.  Every stage the 64 decisions and, after the clock
// edge, the 64 stored metrics are compared with the forward reference stage
// of vd_tb_pkg.  frame_first restarts the reference at state 0.
module tb_vd_pmu;
  import vd_pkg::*;
  import vd_tb_pkg::*;

  logic clk = 0, rst_n = 0, sym_valid = 0, frame_first = 0;
  code_t rx = '0;
  logic [NSTATES-1:0] decisions;
  pm_t pm [NSTATES];
  int checks = 0, failures = 0, cycles = 0, gaps = 0, starts = 0;

  vd_pmu dut (.clk(clk), .rst_n(rst_n), .sym_valid(sym_valid),
              .frame_first(frame_first), .rx(rx), .decisions(decisions), .pm(pm));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  int ref_pm [NS];
  logic [NS-1:0] ref_dec;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      for (int t = 0; t < FRAME_LEN; t++) begin
        // occasional idle clocks: metrics must hold
        if ($urandom_range(0, 4) == 0) begin
          pm_t hold [NSTATES];
          sym_valid = 0; rx = 2'($urandom); gaps++;
          hold = pm;
          @(posedge clk); #1;
          checks++;
          if (pm != hold) begin failures++; $display("FAIL metrics moved while idle"); end
        end
        sym_valid   = 1;
        frame_first = (t == 0);
        rx          = 2'($urandom);
        if (t == 0) begin
          starts++;
          for (int s = 0; s < NS; s++) ref_pm[s] = (s == 0) ? 0 : INF;
        end
        ref_stage(ref_pm, rx, ref_dec);
        #1;
        checks++;
        if (decisions !== ref_dec) begin
          failures++;
          $display("FAIL frame %0d stage %0d decisions %h want %h", f, t, decisions, ref_dec);
        end
        @(posedge clk); #1;
        for (int s = 0; s < NS; s++) begin
          checks++;
          if (int'(pm[s]) != ref_pm[s]) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d stage %0d pm[%0d]=%0d want %0d",
                                        f, t, s, pm[s], ref_pm[s]);
          end
        end
      end
    end
    sym_valid = 0;
    checks++;
    if (gaps == 0 || starts < 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
