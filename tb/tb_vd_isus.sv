// tb_vd_isus -- survivor store.  Random decision words are written with
// gaps in sym_valid over three frames; after every clock the whole store is
// compared with a model in which only the register of the current stage
// changes.  The number of registers that changed per clock is also checked
// (at most one: the clock-gating rule).
module tb_vd_isus;
  import vd_pkg::*;
  localparam int N = FRAME_LEN;
  logic clk = 0, rst_n = 0, sym_valid = 0;
  logic [NSTATES-1:0] decisions = '0;
  logic [NSTATES-1:0] surv [N];
  logic [N-1:0] slot;
  logic [NSTATES-1:0] model [N];
  logic [NSTATES-1:0] prev_surv [N];
  int checks = 0, failures = 0, pos = 0, idle = 0;

  vd_isus dut (.clk(clk), .rst_n(rst_n), .sym_valid(sym_valid),
               .decisions(decisions), .surv(surv), .slot(slot));

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3 * N + 40; c++) begin
      int changed;
      sym_valid = ($urandom_range(0, 3) != 0);
      decisions = {$urandom, $urandom};
      prev_surv = surv;
      checks++;
      if (slot !== (N'(1) << pos)) begin failures++; $display("FAIL slot %h pos %0d", slot, pos); end
      @(posedge clk); #1;
      if (sym_valid) begin
        model[pos] = decisions;
        pos = (pos + 1) % N;
      end else idle++;
      changed = 0;
      for (int i = 0; i < N; i++) begin
        if (surv[i] !== prev_surv[i]) changed++;
        checks++;
        if (surv[i] !== model[i]) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d reg %0d %h want %h", c, i, surv[i], model[i]);
        end
      end
      checks++;
      if (changed > 1) begin failures++; $display("FAIL %0d registers changed", changed); end
    end
    checks++;
    if (idle == 0) failures++;
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
