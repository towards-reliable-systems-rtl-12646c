// tb_tmu_budget_alloc: random configured budgets, burst lengths and queued
// beats are applied to two instances (no prescaler, and a prescaler step of
// 32) and every phase budget and the total are compared with the adaptive
// formula computed here: queue phase = base + queued beats x per-beat, burst
// phase = base + (len+1) x per-beat, other phases = base; ticks = cycles
// divided by the step, rounded up, plus one spare tick when the step is
// above 1, clipped to the counter range. The Ethernet
// case (phases 10,20,10,0,20,10, 1 cycle per beat, 250 beats) must give a
// 320-cycle total.
module tb_tmu_budget_alloc;
  localparam int NP = 6;
  logic [NP-1:0][15:0] cfg;
  logic [15:0]         beat;
  logic [7:0]          len;
  logic [15:0]         pend;
  logic [NP-1:0][9:0]  pb1;
  logic [9:0]          tot1;
  logic [NP-1:0][4:0]  pb32;
  logic [4:0]          tot32;
  int checks = 0, failures = 0;

  tmu_budget_alloc #(.NumPhases(NP), .QueuePhase(1), .BurstPhase(3), .PrescalerStep(1),  .CntWidth(10))
    dut1 (.cfg_budget_i(cfg), .cfg_beat_i(beat), .len_i(len), .pending_beats_i(pend),
          .phase_budget_o(pb1), .total_budget_o(tot1));
  tmu_budget_alloc #(.NumPhases(NP), .QueuePhase(1), .BurstPhase(3), .PrescalerStep(32), .CntWidth(10))
    dut32 (.cfg_budget_i(cfg), .cfg_beat_i(beat), .len_i(len), .pending_beats_i(pend),
           .phase_budget_o(pb32), .total_budget_o(tot32));

  function automatic longint ticks(longint cyc, longint step, longint maxv);
    longint t;
    t = (cyc + step - 1) / step + ((step > 1) ? 1 : 0);
    return (t > maxv) ? maxv : t;
  endfunction

  task automatic check_all();
    longint c[NP];
    longint tot = 0;
    for (int p = 0; p < NP; p++) begin
      c[p] = cfg[p];
      if (p == 1) c[p] += longint'(pend) * beat;
      if (p == 3) c[p] += (longint'(len) + 1) * beat;
      tot += c[p];
    end
    #1;
    for (int p = 0; p < NP; p++) begin
      checks += 2;
      if (pb1[p] != ticks(c[p], 1, 1023)) begin failures++; $display("FAIL step1 phase %0d: %0d vs %0d", p, pb1[p], ticks(c[p],1,1023)); end
      if (pb32[p] != ticks(c[p], 32, 31)) begin failures++; $display("FAIL step32 phase %0d: %0d vs %0d", p, pb32[p], ticks(c[p],32,31)); end
    end
    checks += 2;
    if (tot1 != ticks(tot, 1, 1023))   begin failures++; $display("FAIL step1 total %0d vs %0d", tot1, ticks(tot,1,1023)); end
    if (tot32 != ticks(tot, 32, 31))   begin failures++; $display("FAIL step32 total %0d vs %0d", tot32, ticks(tot,32,31)); end
  endtask

  initial begin
    // Ethernet case
    cfg = {16'd10, 16'd20, 16'd0, 16'd10, 16'd20, 16'd10};
    beat = 16'd1; len = 8'd249; pend = '0;
    check_all();
    checks++;
    if (tot1 != 10'd320) begin failures++; $display("FAIL Ethernet total %0d", tot1); end
    checks++;
    if (pb1[3] != 10'd250) begin failures++; $display("FAIL Ethernet burst %0d", pb1[3]); end
    // queued traffic lengthens the queue phase only
    pend = 16'd16; #1;
    checks++;
    if (pb1[1] != 10'd36 || pb1[3] != 10'd250) begin failures++; $display("FAIL queue phase %0d", pb1[1]); end
    // random
    for (int i = 0; i < 2000; i++) begin
      for (int p = 0; p < NP; p++) cfg[p] = 16'($urandom_range(0, (i % 3 == 0) ? 65535 : 200));
      beat = 16'($urandom_range(0, 8));
      len  = 8'($urandom);
      pend = 16'($urandom_range(0, 600));
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
