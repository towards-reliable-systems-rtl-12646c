// tmu_prescaler: count-enable generator for the TMU's transaction counters.
//
// A modulo-PrescalerStep counter runs freely and asserts tick_o for one
// cycle every PrescalerStep cycles (on every cycle when PrescalerStep is 1).
// Counters that advance only on tick_o measure time in units of
// PrescalerStep cycles and so need fewer bits, at the price of a detection
// latency that is coarser by up to one step. clear_i restarts the count so
// that the first tick comes PrescalerStep cycles later.
// The default step of 32 is the one the paper evaluates for its prescaled
// configurations; the TMU passes its own PrescalerStep (1 by default, which
// reduces this block to a constant tick and leaves clk_i, rst_ni and clear_i
// unused, as a linter notes). The prescaler and its purpose follow the
// paper; the counter itself is the simplest realisation and this design's
// own choice.
module tmu_prescaler #(
  parameter int unsigned PrescalerStep = 32
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic clear_i,
  output logic tick_o
);
  if (PrescalerStep <= 1) begin : gen_bypass
    assign tick_o = 1'b1;
  end else begin : gen_div
    localparam int unsigned W = $clog2(PrescalerStep);
    logic [W-1:0] cnt_q;
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)                                  cnt_q <= '0;
      else if (clear_i)                             cnt_q <= '0;
      else if (cnt_q == W'(PrescalerStep - 1))      cnt_q <= '0;
      else                                          cnt_q <= cnt_q + 1'b1;
    end
    assign tick_o = !clear_i && (cnt_q == W'(PrescalerStep - 1));
  end
endmodule
