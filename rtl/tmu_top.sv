// tmu_top: AXI4 Transaction Monitoring Unit (TMU) for one subordinate.
//
// The TMU sits between the interconnect (mst_* port, where the TMU acts as
// subordinate) and one subordinate device (slv_* port, where it acts as
// manager). In normal operation every channel passes straight through, so no
// cycle is added, while the write guard and the read guard watch each
// transaction. tmu_id_remap first compacts the manager's IDs to
// $clog2(MaxUniqIds) bits; the subordinate sees compacted IDs.
//
// When a guard detects a fault (phase or transaction timeout, unrequested
// response, response too early, wrong last flag) the TMU:
//   * stops passing anything in that same cycle ("pass" low) and from then
//     on drives all request signals to the subordinate to zero;
//   * answers every outstanding, accepted transaction towards the manager
//     with SLVERR (one B per write, the remaining beats of every read) and
//     accepts and drops further write data;
//   * raises reset_req_o (OR of both guards' requests) to an external reset
//     unit and waits for reset_ack_i;
//   * sets the interrupt status, so irq_o rises if enabled;
//   * then clears its tables and resumes monitoring.
// FullCounter selects the Full-Counter variant (one counter per phase) or
// the Tiny-Counter variant (one counter per transaction); PrescalerStep > 1
// makes the counters advance every PrescalerStep cycles with narrower
// counters. Default sizes: 4 unique IDs x 4 transactions per ID = 16
// outstanding transactions per direction, 10-bit cycle counters.
// Structure (remapper, two guards, registers, '0 mux on the request path,
// SLVERR mux on the response path, OR of the reset requests) follows the
// paper's block diagram; the AXI fields carried (no cache, prot, qos, lock,
// region, user) and the register port are this design's choices.
// Lint note: rst_ni is an asynchronous, active-low reset; the assertions
// at the end also read it in their disable clause, which the linter reports
// as a signal used both synchronously and asynchronously. Assertions make no
// hardware, so the note stands.
module tmu_top #(
  parameter bit          FullCounter   = 1'b1,
  parameter int unsigned MaxUniqIds    = 4,
  parameter int unsigned TxnPerUniqId  = 4,
  parameter int unsigned PrescalerStep = 1,
  parameter int unsigned CntWidth      = 10,
  parameter int unsigned AddrWidth     = 48,
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned MstIdWidth    = 8,
  // derived
  parameter int unsigned SlvIdWidth    = (MaxUniqIds > 1) ? $clog2(MaxUniqIds) : 1
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // ---- manager side (from the interconnect)
  input  logic                     mst_aw_valid_i,
  output logic                     mst_aw_ready_o,
  input  logic [MstIdWidth-1:0]    mst_aw_id_i,
  input  logic [AddrWidth-1:0]     mst_aw_addr_i,
  input  logic [7:0]               mst_aw_len_i,
  input  logic [2:0]               mst_aw_size_i,
  input  logic [1:0]               mst_aw_burst_i,
  input  logic                     mst_w_valid_i,
  output logic                     mst_w_ready_o,
  input  logic [DataWidth-1:0]     mst_w_data_i,
  input  logic [DataWidth/8-1:0]   mst_w_strb_i,
  input  logic                     mst_w_last_i,
  output logic                     mst_b_valid_o,
  input  logic                     mst_b_ready_i,
  output logic [MstIdWidth-1:0]    mst_b_id_o,
  output logic [1:0]               mst_b_resp_o,
  input  logic                     mst_ar_valid_i,
  output logic                     mst_ar_ready_o,
  input  logic [MstIdWidth-1:0]    mst_ar_id_i,
  input  logic [AddrWidth-1:0]     mst_ar_addr_i,
  input  logic [7:0]               mst_ar_len_i,
  input  logic [2:0]               mst_ar_size_i,
  input  logic [1:0]               mst_ar_burst_i,
  output logic                     mst_r_valid_o,
  input  logic                     mst_r_ready_i,
  output logic [MstIdWidth-1:0]    mst_r_id_o,
  output logic [DataWidth-1:0]     mst_r_data_o,
  output logic [1:0]               mst_r_resp_o,
  output logic                     mst_r_last_o,
  // ---- subordinate side
  output logic                     slv_aw_valid_o,
  input  logic                     slv_aw_ready_i,
  output logic [SlvIdWidth-1:0]    slv_aw_id_o,
  output logic [AddrWidth-1:0]     slv_aw_addr_o,
  output logic [7:0]               slv_aw_len_o,
  output logic [2:0]               slv_aw_size_o,
  output logic [1:0]               slv_aw_burst_o,
  output logic                     slv_w_valid_o,
  input  logic                     slv_w_ready_i,
  output logic [DataWidth-1:0]     slv_w_data_o,
  output logic [DataWidth/8-1:0]   slv_w_strb_o,
  output logic                     slv_w_last_o,
  input  logic                     slv_b_valid_i,
  output logic                     slv_b_ready_o,
  input  logic [SlvIdWidth-1:0]    slv_b_id_i,
  input  logic [1:0]               slv_b_resp_i,
  output logic                     slv_ar_valid_o,
  input  logic                     slv_ar_ready_i,
  output logic [SlvIdWidth-1:0]    slv_ar_id_o,
  output logic [AddrWidth-1:0]     slv_ar_addr_o,
  output logic [7:0]               slv_ar_len_o,
  output logic [2:0]               slv_ar_size_o,
  output logic [1:0]               slv_ar_burst_o,
  input  logic                     slv_r_valid_i,
  output logic                     slv_r_ready_o,
  input  logic [SlvIdWidth-1:0]    slv_r_id_i,
  input  logic [DataWidth-1:0]     slv_r_data_i,
  input  logic [1:0]               slv_r_resp_i,
  input  logic                     slv_r_last_i,
  // ---- register port
  input  logic                     reg_valid_i,
  input  logic                     reg_write_i,
  input  logic [7:0]               reg_addr_i,
  input  logic [31:0]              reg_wdata_i,
  output logic [31:0]              reg_rdata_o,
  output logic                     reg_error_o,
  // ---- recovery
  output logic                     irq_o,
  output logic                     reset_req_o,
  input  logic                     reset_ack_i
);
  import tmu_pkg::*;

  localparam int unsigned TickWidth = (CntWidth > $clog2(PrescalerStep)) ?
                                      CntWidth - $clog2(PrescalerStep) : 1;
  localparam int unsigned NumWCnt = FullCounter ? NumWPhases : 1;
  localparam int unsigned NumRCnt = FullCounter ? NumRPhases : 1;

  // ---------------------------------------------------------------- config
  logic                                  enable, reset_en;
  logic [NumWPhases-1:0][BudgetWidth-1:0] w_budget;
  logic [NumRPhases-1:0][BudgetWidth-1:0] r_budget;
  logic [BudgetWidth-1:0]                 w_beat, r_beat;

  // ---------------------------------------------------------------- remap
  logic                  int_aw_valid, int_aw_ready, int_ar_valid, int_ar_ready;
  logic [SlvIdWidth-1:0] int_aw_id, int_ar_id, int_b_id, int_r_id;

  tmu_id_remap #(
    .MstIdWidth  (MstIdWidth),
    .MaxUniqIds  (MaxUniqIds),
    .TxnPerUniqId(TxnPerUniqId)
  ) i_remap (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .mst_aw_valid_i (mst_aw_valid_i),
    .mst_aw_id_i    (mst_aw_id_i),
    .mst_aw_ready_o (mst_aw_ready_o),
    .int_aw_valid_o (int_aw_valid),
    .int_aw_id_o    (int_aw_id),
    .int_aw_ready_i (int_aw_ready),
    .int_b_id_i     (int_b_id),
    .mst_b_id_o     (mst_b_id_o),
    .mst_b_hs_i     (mst_b_valid_o && mst_b_ready_i),
    .mst_ar_valid_i (mst_ar_valid_i),
    .mst_ar_id_i    (mst_ar_id_i),
    .mst_ar_ready_o (mst_ar_ready_o),
    .int_ar_valid_o (int_ar_valid),
    .int_ar_id_o    (int_ar_id),
    .int_ar_ready_i (int_ar_ready),
    .int_r_id_i     (int_r_id),
    .mst_r_id_o     (mst_r_id_o),
    .mst_r_last_hs_i(mst_r_valid_o && mst_r_ready_i && mst_r_last_o)
  );

  // ---------------------------------------------------------------- guards
  logic pass;
  logic aw_gate, w_gate, ar_gate;
  logic w_sev, r_sev, w_fault, r_fault, w_drained, r_drained, w_rst_req, r_rst_req;
  logic ab_b_valid, ab_r_valid, ab_r_last;
  logic [SlvIdWidth-1:0] ab_b_id, ab_r_id;
  err_info_t w_err, r_err;
  logic [AddrWidth-1:0] w_err_addr, r_err_addr;
  logic [NumWCnt-1:0][TickWidth-1:0] w_lat;
  logic [NumRCnt-1:0][TickWidth-1:0] r_lat;
  logic w_done, r_done;

  // Everything passes only while both guards monitor and none flags a fault.
  assign pass = !w_sev && !r_sev && !w_fault && !r_fault;

  tmu_write_guard #(
    .FullCounter  (FullCounter),
    .MaxUniqIds   (MaxUniqIds),
    .TxnPerUniqId (TxnPerUniqId),
    .PrescalerStep(PrescalerStep),
    .CntWidth     (CntWidth),
    .AddrWidth    (AddrWidth)
  ) i_wguard (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .enable_i       (enable),
    .reset_en_i     (reset_en),
    .cfg_budget_i   (w_budget),
    .cfg_beat_i     (w_beat),
    .aw_valid_i     (int_aw_valid),
    .aw_id_i        (int_aw_id),
    .aw_addr_i      (mst_aw_addr_i),
    .aw_len_i       (mst_aw_len_i),
    .aw_ready_i     (slv_aw_ready_i),
    .aw_gate_o      (aw_gate),
    .w_valid_i      (mst_w_valid_i),
    .w_last_i       (mst_w_last_i),
    .w_ready_i      (slv_w_ready_i),
    .w_gate_o       (w_gate),
    .b_valid_i      (slv_b_valid_i),
    .b_id_i         (slv_b_id_i),
    .b_ready_i      (mst_b_ready_i),
    .abort_b_valid_o(ab_b_valid),
    .abort_b_id_o   (ab_b_id),
    .abort_b_ready_i(mst_b_ready_i),
    .severed_o      (w_sev),
    .fault_o        (w_fault),
    .pass_i         (pass),
    .drained_o      (w_drained),
    .peer_drained_i (r_drained),
    .reset_req_o    (w_rst_req),
    .reset_ack_i    (reset_ack_i),
    .err_o          (w_err),
    .err_addr_o     (w_err_addr),
    .lat_o          (w_lat),
    .done_o         (w_done)
  );

  tmu_read_guard #(
    .FullCounter  (FullCounter),
    .MaxUniqIds   (MaxUniqIds),
    .TxnPerUniqId (TxnPerUniqId),
    .PrescalerStep(PrescalerStep),
    .CntWidth     (CntWidth),
    .AddrWidth    (AddrWidth)
  ) i_rguard (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .enable_i       (enable),
    .reset_en_i     (reset_en),
    .cfg_budget_i   (r_budget),
    .cfg_beat_i     (r_beat),
    .ar_valid_i     (int_ar_valid),
    .ar_id_i        (int_ar_id),
    .ar_addr_i      (mst_ar_addr_i),
    .ar_len_i       (mst_ar_len_i),
    .ar_ready_i     (slv_ar_ready_i),
    .ar_gate_o      (ar_gate),
    .r_valid_i      (slv_r_valid_i),
    .r_id_i         (slv_r_id_i),
    .r_last_i       (slv_r_last_i),
    .r_ready_i      (mst_r_ready_i),
    .abort_r_valid_o(ab_r_valid),
    .abort_r_id_o   (ab_r_id),
    .abort_r_last_o (ab_r_last),
    .abort_r_ready_i(mst_r_ready_i),
    .severed_o      (r_sev),
    .fault_o        (r_fault),
    .pass_i         (pass),
    .drained_o      (r_drained),
    .peer_drained_i (w_drained),
    .reset_req_o    (r_rst_req),
    .reset_ack_i    (reset_ack_i),
    .err_o          (r_err),
    .err_addr_o     (r_err_addr),
    .lat_o          (r_lat),
    .done_o         (r_done)
  );

  // ------------------------------------------------- request path ('0 mux)
  assign int_aw_ready   = pass && aw_gate && slv_aw_ready_i;
  assign slv_aw_valid_o = pass && aw_gate && int_aw_valid;
  assign slv_aw_id_o    = pass ? int_aw_id      : '0;
  assign slv_aw_addr_o  = pass ? mst_aw_addr_i  : '0;
  assign slv_aw_len_o   = pass ? mst_aw_len_i   : '0;
  assign slv_aw_size_o  = pass ? mst_aw_size_i  : '0;
  assign slv_aw_burst_o = pass ? mst_aw_burst_i : '0;

  assign slv_w_valid_o  = pass && w_gate && mst_w_valid_i;
  assign slv_w_data_o   = pass ? mst_w_data_i : '0;
  assign slv_w_strb_o   = pass ? mst_w_strb_i : '0;
  assign slv_w_last_o   = pass ? mst_w_last_i : 1'b0;
  // while severed, write data of aborted writes is accepted and dropped
  assign mst_w_ready_o  = pass ? (w_gate && slv_w_ready_i) : w_sev;

  assign int_ar_ready   = pass && ar_gate && slv_ar_ready_i;
  assign slv_ar_valid_o = pass && ar_gate && int_ar_valid;
  assign slv_ar_id_o    = pass ? int_ar_id      : '0;
  assign slv_ar_addr_o  = pass ? mst_ar_addr_i  : '0;
  assign slv_ar_len_o   = pass ? mst_ar_len_i   : '0;
  assign slv_ar_size_o  = pass ? mst_ar_size_i  : '0;
  assign slv_ar_burst_o = pass ? mst_ar_burst_i : '0;

  assign slv_b_ready_o  = pass && mst_b_ready_i;
  assign slv_r_ready_o  = pass && mst_r_ready_i;

  // ------------------------------------------------ response path (SLVERR mux)
  assign mst_b_valid_o = pass ? slv_b_valid_i : ab_b_valid;
  assign int_b_id      = pass ? slv_b_id_i    : ab_b_id;
  assign mst_b_resp_o  = pass ? slv_b_resp_i  : RespSlvErr;

  assign mst_r_valid_o = pass ? slv_r_valid_i : ab_r_valid;
  assign int_r_id      = pass ? slv_r_id_i    : ab_r_id;
  assign mst_r_data_o  = pass ? slv_r_data_i  : '0;
  assign mst_r_resp_o  = pass ? slv_r_resp_i  : RespSlvErr;
  assign mst_r_last_o  = pass ? slv_r_last_i  : ab_r_last;

  assign reset_req_o = w_rst_req || r_rst_req;

  // ---------------------------------------------------------------- registers
  logic [NumWPhases-1:0][CntWidth-1:0] w_lat_ext;
  logic [NumRPhases-1:0][CntWidth-1:0] r_lat_ext;
  always_comb begin
    w_lat_ext = '0;
    r_lat_ext = '0;
    for (int unsigned p = 0; p < NumWCnt; p++) w_lat_ext[p] = CntWidth'(w_lat[p]);
    for (int unsigned p = 0; p < NumRCnt; p++) r_lat_ext[p] = CntWidth'(r_lat[p]);
  end

  tmu_regs #(
    .AddrWidth(AddrWidth),
    .LatWidth (CntWidth)
  ) i_regs (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .reg_valid_i (reg_valid_i),
    .reg_write_i (reg_write_i),
    .reg_addr_i  (reg_addr_i),
    .reg_wdata_i (reg_wdata_i),
    .reg_rdata_o (reg_rdata_o),
    .reg_error_o (reg_error_o),
    .enable_o    (enable),
    .reset_en_o  (reset_en),
    .w_budget_o  (w_budget),
    .w_beat_o    (w_beat),
    .r_budget_o  (r_budget),
    .r_beat_o    (r_beat),
    .w_fault_i   (w_fault),
    .r_fault_i   (r_fault),
    .w_err_i     (w_err),
    .w_err_addr_i(w_err_addr),
    .r_err_i     (r_err),
    .r_err_addr_i(r_err_addr),
    .w_lat_i     (w_lat_ext),
    .r_lat_i     (r_lat_ext),
    .w_done_i    (w_done),
    .r_done_i    (r_done),
    .irq_o       (irq_o)
  );

  // ---------------------------------------------------------------- assertions
  // A response handed to the manager keeps its valid until accepted; the
  // only exception is the cycle a fault cuts the subordinate off, after
  // which the same write is answered again by the abort sequence.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (mst_b_valid_o && !mst_b_ready_i && !w_fault && !r_fault)
                   |=> (mst_b_valid_o || w_fault || r_fault))
    else $error("tmu_top: B valid dropped without handshake");
  // Nothing reaches the subordinate while the TMU is severed.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (w_sev || r_sev) |-> !(slv_aw_valid_o || slv_w_valid_o || slv_ar_valid_o))
    else $error("tmu_top: request forwarded while severed");
endmodule
