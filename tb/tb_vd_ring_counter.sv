// tb_vd_ring_counter -- the one-hot position must follow the number of
// accepted advances modulo N, hold when advance is low and wrap at N.
module tb_vd_ring_counter;
  localparam int N = 40;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [N-1:0] slot;
  int checks = 0, failures = 0, count = 0, wraps = 0;

  vd_ring_counter #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .advance(advance), .slot(slot));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      checks++;
      if (slot !== (N'(1) << (count % N))) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d slot=%h count=%0d", i, slot, count);
      end
      advance = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (advance) begin
        count++;
        if (count % N == 0) wraps++;
      end
    end
    checks++;
    if (wraps < 2) failures++;
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
