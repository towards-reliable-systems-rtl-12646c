// tmu_regs: software-visible registers of the TMU.
//
// A simple register port (valid, write, byte address, 32-bit data, answered
// in the same cycle) gives software control over the TMU and access to its
// logs. Register map (tmu_pkg::Reg*):
//   0x00 CTRL      [0] enable fault detection, [1] interrupt enable,
//                  [2] request a subordinate reset on a fault (all reset to 1)
//   0x04 IRQ       [0] write-side fault, [1] read-side fault; write 1 to clear
//   0x10-0x24      write phase budgets AW0 AW1 W0 W1 B0 B1, in clock cycles
//   0x28           write budget per data beat
//   0x30-0x3c      read phase budgets AR0 AR1 R0 R1, in clock cycles
//   0x40           read budget per data beat
//   0x44/0x48      write error record (tmu_pkg::err_info_t) / its address
//   0x4c/0x50      read error record / its address
//   0x60-0x74      per-phase counters of the last completed write (ticks)
//   0x80-0x8c      per-phase counters of the last completed read (ticks)
//   0x90 0x94 0x98 completed writes, completed reads, faults detected
// irq_o is high while a fault bit is set and interrupts are enabled.
// Budgets reset to the per-phase budgets used for the Ethernet study that
// motivates the design: 10, 20, 10 cycles for the address, data-entry and
// first-data handshake phases, 1 cycle per beat for the burst, 20 and 10
// cycles for the response phases (320 cycles in all for a 250-beat burst).
// That such registers exist (enable, budgets, interrupt, logs) follows the
// paper; the map, the port and the read budgets are this design's choices.
// Lint note: registers are at most 16 bits wide and error addresses are
// reported in their low 32 bits, so the upper bits of reg_wdata_i and of the
// error address inputs are not used.
module tmu_regs #(
  parameter int unsigned AddrWidth = 48,
  parameter int unsigned LatWidth  = 10
) (
  input  logic                                          clk_i,
  input  logic                                          rst_ni,
  // register port
  input  logic                                          reg_valid_i,
  input  logic                                          reg_write_i,
  input  logic [7:0]                                    reg_addr_i,
  input  logic [31:0]                                   reg_wdata_i,
  output logic [31:0]                                   reg_rdata_o,
  output logic                                          reg_error_o,
  // configuration out
  output logic                                          enable_o,
  output logic                                          reset_en_o,
  output logic [tmu_pkg::NumWPhases-1:0][tmu_pkg::BudgetWidth-1:0] w_budget_o,
  output logic [tmu_pkg::BudgetWidth-1:0]               w_beat_o,
  output logic [tmu_pkg::NumRPhases-1:0][tmu_pkg::BudgetWidth-1:0] r_budget_o,
  output logic [tmu_pkg::BudgetWidth-1:0]               r_beat_o,
  // status in
  input  logic                                          w_fault_i,
  input  logic                                          r_fault_i,
  input  tmu_pkg::err_info_t                            w_err_i,
  input  logic [AddrWidth-1:0]                          w_err_addr_i,
  input  tmu_pkg::err_info_t                            r_err_i,
  input  logic [AddrWidth-1:0]                          r_err_addr_i,
  input  logic [tmu_pkg::NumWPhases-1:0][LatWidth-1:0]  w_lat_i,
  input  logic [tmu_pkg::NumRPhases-1:0][LatWidth-1:0]  r_lat_i,
  input  logic                                          w_done_i,
  input  logic                                          r_done_i,
  output logic                                          irq_o
);
  import tmu_pkg::*;

  localparam logic [NumWPhases-1:0][BudgetWidth-1:0] WReset =
    {16'd10, 16'd20, 16'd0, 16'd10, 16'd20, 16'd10};   // B1 B0 W1 W0 AW1 AW0
  localparam logic [NumRPhases-1:0][BudgetWidth-1:0] RReset =
    {16'd0, 16'd10, 16'd20, 16'd10};                   // R1 R0 AR1 AR0

  logic        irq_en_q;
  logic [1:0]  irq_q;
  logic [31:0] wcnt_q, rcnt_q, fcnt_q;
  logic        wr;
  assign wr = reg_valid_i && reg_write_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      enable_o   <= 1'b1;
      irq_en_q   <= 1'b1;
      reset_en_o <= 1'b1;
      w_budget_o <= WReset;
      w_beat_o   <= 16'd1;
      r_budget_o <= RReset;
      r_beat_o   <= 16'd1;
      irq_q      <= '0;
      wcnt_q     <= '0;
      rcnt_q     <= '0;
      fcnt_q     <= '0;
    end else begin
      if (wr) begin
        unique case (reg_addr_i)
          RegCtrl:  {reset_en_o, irq_en_q, enable_o} <= reg_wdata_i[2:0];
          RegWBeat: w_beat_o <= reg_wdata_i[BudgetWidth-1:0];
          RegRBeat: r_beat_o <= reg_wdata_i[BudgetWidth-1:0];
          default: begin
            for (int unsigned p = 0; p < NumWPhases; p++)
              if (reg_addr_i == RegWBudget0 + 8'(4 * p)) w_budget_o[p] <= reg_wdata_i[BudgetWidth-1:0];
            for (int unsigned p = 0; p < NumRPhases; p++)
              if (reg_addr_i == RegRBudget0 + 8'(4 * p)) r_budget_o[p] <= reg_wdata_i[BudgetWidth-1:0];
          end
        endcase
      end
      // interrupt status: set by faults, cleared by writing 1
      irq_q <= (irq_q & ~((wr && reg_addr_i == RegIrq) ? reg_wdata_i[1:0] : 2'b00))
             | {r_fault_i, w_fault_i};
      wcnt_q <= wcnt_q + 32'(w_done_i);
      rcnt_q <= rcnt_q + 32'(r_done_i);
      fcnt_q <= fcnt_q + 32'(w_fault_i || r_fault_i);
    end
  end

  assign irq_o = irq_en_q && (irq_q != '0);

  always_comb begin
    reg_rdata_o = '0;
    reg_error_o = reg_valid_i;
    unique case (reg_addr_i)
      RegCtrl:     begin reg_rdata_o = {29'd0, reset_en_o, irq_en_q, enable_o}; reg_error_o = 1'b0; end
      RegIrq:      begin reg_rdata_o = {30'd0, irq_q};                        reg_error_o = 1'b0; end
      RegWBeat:    begin reg_rdata_o = 32'(w_beat_o);                         reg_error_o = 1'b0; end
      RegRBeat:    begin reg_rdata_o = 32'(r_beat_o);                         reg_error_o = 1'b0; end
      RegWErr:     begin reg_rdata_o = 32'(w_err_i);                          reg_error_o = 1'b0; end
      RegWErrAddr: begin reg_rdata_o = w_err_addr_i[31:0];                    reg_error_o = 1'b0; end
      RegRErr:     begin reg_rdata_o = 32'(r_err_i);                          reg_error_o = 1'b0; end
      RegRErrAddr: begin reg_rdata_o = r_err_addr_i[31:0];                    reg_error_o = 1'b0; end
      RegWCount:   begin reg_rdata_o = wcnt_q;                                reg_error_o = 1'b0; end
      RegRCount:   begin reg_rdata_o = rcnt_q;                                reg_error_o = 1'b0; end
      RegFaults:   begin reg_rdata_o = fcnt_q;                                reg_error_o = 1'b0; end
      default: begin
        for (int unsigned p = 0; p < NumWPhases; p++) begin
          if (reg_addr_i == RegWBudget0 + 8'(4 * p)) begin reg_rdata_o = 32'(w_budget_o[p]); reg_error_o = 1'b0; end
          if (reg_addr_i == RegWLat0 + 8'(4 * p))    begin reg_rdata_o = 32'(w_lat_i[p]);    reg_error_o = 1'b0; end
        end
        for (int unsigned p = 0; p < NumRPhases; p++) begin
          if (reg_addr_i == RegRBudget0 + 8'(4 * p)) begin reg_rdata_o = 32'(r_budget_o[p]); reg_error_o = 1'b0; end
          if (reg_addr_i == RegRLat0 + 8'(4 * p))    begin reg_rdata_o = 32'(r_lat_i[p]);    reg_error_o = 1'b0; end
        end
      end
    endcase
  end
endmodule
