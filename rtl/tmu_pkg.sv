// tmu_pkg: types and constants shared by the Transaction Monitoring Unit (TMU).
//
// The TMU watches every AXI4 transaction that reaches one subordinate. Each
// outstanding transaction passes through a fixed sequence of phases; the
// phase enumerations below name them in order. The Full-Counter variant keeps
// one counter per phase, the Tiny-Counter variant a single counter per
// transaction. The phase lists follow the write phases enumerated for the
// Full-Counter and the counter names AW0/AW1/W0/W1/B0/B1 and AR0/AR1/R0/R1;
// the error codes and the register map are this design's own choices.
package tmu_pkg;

  // Width of a budget as software writes it (in clock cycles).
  localparam int unsigned BudgetWidth = 16;
  // Width of a data-beat count (AXI4 bursts have at most 256 beats).
  localparam int unsigned BeatWidth   = 16;

  // Write phases, in the order a write passes through them.
  typedef enum logic [2:0] {
    W_PH_AW_HS    = 3'd0,  // AW0: aw_valid -> aw_ready
    W_PH_DATA_ENT = 3'd1,  // AW1: aw_ready -> first w_valid (queue waiting)
    W_PH_W_HS     = 3'd2,  // W0 : first w_valid -> w_ready
    W_PH_BURST    = 3'd3,  // W1 : w_first -> w_last (data transfer)
    W_PH_B_WAIT   = 3'd4,  // B0 : w_last -> b_valid
    W_PH_B_HS     = 3'd5   // B1 : b_valid -> b_ready
  } w_phase_e;
  localparam int unsigned NumWPhases = 6;

  // Read phases.
  typedef enum logic [1:0] {
    R_PH_AR_HS    = 2'd0,  // AR0: ar_valid -> ar_ready
    R_PH_DATA_ENT = 2'd1,  // AR1: ar_ready -> first r_valid (queue waiting)
    R_PH_R_HS     = 2'd2,  // R0 : first r_valid -> r_ready
    R_PH_BURST    = 2'd3   // R1 : r_first -> r_last (data transfer)
  } r_phase_e;
  localparam int unsigned NumRPhases = 4;

  // Kind of fault a guard reports.
  typedef enum logic [2:0] {
    ERR_NONE      = 3'd0,
    ERR_TIMEOUT   = 3'd1,  // a phase (Fc) or the whole transaction (Tc) ran out of budget
    ERR_UNREQ     = 3'd2,  // response for an ID with nothing outstanding (ID match / unrequested)
    ERR_LAST      = 3'd3,  // last flag does not match the burst length
    ERR_EARLY_RSP = 3'd4,  // write response before the last write beat
    ERR_PEER      = 3'd5   // the other guard faulted; this guard only aborts
  } err_e;

  // Error record a guard keeps for software.
  typedef struct packed {
    err_e        code;
    logic [2:0]  phase;   // phase of the faulting transaction
    logic [7:0]  id;      // compacted ID
    logic [7:0]  slot;    // LD table slot
  } err_info_t;

  // AXI4 response codes used.
  localparam logic [1:0] RespOkay   = 2'b00;
  localparam logic [1:0] RespSlvErr = 2'b10;

  // Guard recovery state.
  typedef enum logic [1:0] {
    G_MONITOR = 2'd0,  // normal monitoring
    G_ABORT   = 2'd1,  // returning SLVERR for every outstanding transaction
    G_WAIT    = 2'd2,  // own transactions aborted, waiting for the other guard
    G_RESET   = 2'd3   // reset_req raised, waiting for reset_ack
  } guard_state_e;

  // Register map (byte addresses, 32-bit registers).
  localparam logic [7:0] RegCtrl      = 8'h00;  // [0] enable [1] irq enable [2] reset enable
  localparam logic [7:0] RegIrq       = 8'h04;  // [0] write fault [1] read fault, write 1 to clear
  localparam logic [7:0] RegWBudget0  = 8'h10;  // 6 write phase budgets, 0x10..0x24
  localparam logic [7:0] RegWBeat     = 8'h28;  // write budget per data beat
  localparam logic [7:0] RegRBudget0  = 8'h30;  // 4 read phase budgets, 0x30..0x3c
  localparam logic [7:0] RegRBeat     = 8'h40;  // read budget per data beat
  localparam logic [7:0] RegWErr      = 8'h44;  // write error record
  localparam logic [7:0] RegWErrAddr  = 8'h48;  // address of the faulting write, low 32 bits
  localparam logic [7:0] RegRErr      = 8'h4c;  // read error record
  localparam logic [7:0] RegRErrAddr  = 8'h50;  // address of the faulting read, low 32 bits
  localparam logic [7:0] RegWLat0     = 8'h60;  // 6 write phase latencies of the last write, 0x60..0x74
  localparam logic [7:0] RegRLat0     = 8'h80;  // 4 read phase latencies of the last read, 0x80..0x8c
  localparam logic [7:0] RegWCount    = 8'h90;  // completed writes
  localparam logic [7:0] RegRCount    = 8'h94;  // completed reads
  localparam logic [7:0] RegFaults    = 8'h98;  // faults detected

endpackage
