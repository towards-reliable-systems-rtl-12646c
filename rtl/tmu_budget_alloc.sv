// tmu_budget_alloc: adaptive time-budget allocation for one new transaction.
//
// Software sets a budget (in clock cycles) for every phase and a budget per
// data beat. When a request is enqueued this block derives its budgets:
//   * the queue-waiting phase (address accepted -> first data beat) gets its
//     configured budget plus pending_beats_i x per-beat budget, so that a
//     request queued behind long bursts is not timed out falsely;
//   * the burst phase (first -> last beat) gets its configured budget plus
//     (len_i + 1) x per-beat budget;
//   * every other phase gets its configured budget.
// Each budget is then converted to prescaler ticks (rounded up, plus one
// spare tick when a prescaler is used) and clipped to the counter range. total_budget_o, the sum of all phase budgets, is the
// single budget the Tiny-Counter variant uses for the whole transaction.
// Purely combinational. That budgets adapt to burst length and queued
// traffic, and are split into queue-waiting and data-transfer parts, follows
// the paper; the exact formula and the rounding are this design's choices.
module tmu_budget_alloc #(
  parameter int unsigned NumPhases     = 6,
  parameter int unsigned QueuePhase    = 1,
  parameter int unsigned BurstPhase    = 3,
  parameter int unsigned PrescalerStep = 1,
  parameter int unsigned CntWidth      = 10,
  // derived: counter width in ticks
  parameter int unsigned TickWidth     = (CntWidth > $clog2(PrescalerStep)) ?
                                         CntWidth - $clog2(PrescalerStep) : 1
) (
  input  logic [NumPhases-1:0][tmu_pkg::BudgetWidth-1:0] cfg_budget_i,
  input  logic [tmu_pkg::BudgetWidth-1:0]                cfg_beat_i,
  input  logic [7:0]                                     len_i,
  input  logic [tmu_pkg::BeatWidth-1:0]                  pending_beats_i,
  output logic [NumPhases-1:0][TickWidth-1:0]            phase_budget_o,
  output logic [TickWidth-1:0]                           total_budget_o
);
  localparam int unsigned SumW = 40;
  localparam logic [SumW-1:0] MaxTicks = SumW'((64'd1 << TickWidth) - 1);

  function automatic logic [TickWidth-1:0] to_ticks(input logic [SumW-1:0] cycles);
    logic [SumW-1:0] t;
    t = (cycles + SumW'(PrescalerStep - 1)) / SumW'(PrescalerStep);
    // a phase that lasts exactly its budget can straddle one more tick
    // boundary than it has whole ticks, so a prescaled budget gets one spare
    // tick: no false timeouts, at the cost of up to two ticks of lateness
    if (PrescalerStep > 1) t = t + 1'b1;
    return (t > MaxTicks) ? MaxTicks[TickWidth-1:0] : t[TickWidth-1:0];
  endfunction

  logic [NumPhases-1:0][SumW-1:0] cycles;
  logic [SumW-1:0]                total_cycles;

  always_comb begin
    total_cycles = '0;
    for (int unsigned p = 0; p < NumPhases; p++) begin
      cycles[p] = SumW'(cfg_budget_i[p]);
      if (p == QueuePhase) cycles[p] = cycles[p] + SumW'(pending_beats_i) * SumW'(cfg_beat_i);
      if (p == BurstPhase) cycles[p] = cycles[p] + (SumW'(len_i) + 1) * SumW'(cfg_beat_i);
      phase_budget_o[p] = to_ticks(cycles[p]);
      total_cycles      = total_cycles + cycles[p];
    end
    total_budget_o = to_ticks(total_cycles);
  end
endmodule
