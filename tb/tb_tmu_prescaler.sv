// tb_tmu_prescaler: checks the tick pattern of tmu_prescaler for a step of 1
// (tick every cycle) and a step of 4 (one tick every 4 cycles, restart after
// clear). Expected ticks come from a cycle count kept by the testbench.
module tb_tmu_prescaler;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic tick1, tick4;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tmu_prescaler #(.PrescalerStep(1)) dut1 (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .tick_o(tick1));
  tmu_prescaler #(.PrescalerStep(4)) dut4 (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .tick_o(tick4));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n4;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // the first sample follows one counting edge: ticks on samples 2, 6, 10, ...
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      check(tick1, 1'b1, "step 1 ticks every cycle");
      check(tick4, (c % 4) == 2, "step 4 tick position");
    end
    n4 = 0;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      n4 += tick4;
    end
    checks++;
    if (n4 != 100) begin failures++; $display("FAIL tick rate %0d/400", n4); end
    // clear restarts the count
    @(negedge clk); clear = 1'b1;
    check(tick4, 1'b0, "no tick while clear");
    @(negedge clk); clear = 1'b0;
    for (int c = 0; c < 8; c++) begin
      check(tick4, (c % 4) == 3, "tick position after clear");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
