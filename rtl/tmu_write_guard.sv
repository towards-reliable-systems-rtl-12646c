// tmu_write_guard: Write Guard of the TMU (AW, W and B channels).
//
// What it does. Every write request that reaches the subordinate is entered
// into the guard's Outstanding Transaction Table (tmu_ott) as soon as its
// aw_valid is seen. From then on the guard follows the write through its six
// phases (tmu_pkg::w_phase_e): AW handshake, data-phase entry, first W
// handshake, burst, WLAST -> BVALID and BVALID -> BREADY. It removes the
// write from the table on the B handshake.
//
// How. Each LD slot holds sticky event flags, set on the clock the event is
// seen whatever the prescaler does. The current phase of a slot is the first
// event that has not happened yet. Counters advance only on prescaler ticks:
// the Full-Counter variant (FullCounter = 1) keeps one counter and one budget
// per phase and compares the active phase's counter with that phase's
// budget, so a stall is caught as soon as its phase overruns. The
// Tiny-Counter variant (FullCounter = 0) keeps one counter from aw_valid to
// the B handshake against the sum of all phase budgets. Budgets are fixed
// when the request is enqueued (tmu_budget_alloc). W beats carry no ID and
// are matched to the oldest request in the EI FIFO; B responses are matched
// to the head of their ID's list.
//
// Checks: timeout (active counter reached its budget), unrequested
// response (B for an ID with nothing outstanding), early response (B before
// the AW handshake or before the last W beat) and burst length (w_last not
// on beat AWLEN+1). Any of them, or a fault anywhere in the TMU (pass_i low),
// moves the guard from MONITOR to ABORT: it then answers each outstanding,
// already accepted write with one SLVERR B (per ID in order) on abort_b_*,
// drops writes never accepted, waits in WAIT until the read guard has also
// drained, and in RESET holds reset_req_o until reset_ack_i. Then the table
// is cleared and monitoring resumes. While not in MONITOR, severed_o tells
// the top to cut the subordinate off.
//
// Interface timing. aw_gate_o/w_gate_o are combinational: the top lets a
// request through only while its gate is high, so normal traffic passes
// without added cycles. fault_o pulses in the cycle a fault is detected;
// err_o/err_addr_o hold the record of the last fault; lat_o holds the
// counter values (ticks) of the last completed write.
// Paper: phases, OTT, adaptive budgets, prescaler with sticky bits, the
// four checks, SLVERR abort, reset request/acknowledge. Own choices: the
// exact protocol rules checked, abort order, W gating until an AW is
// known, and the WAIT step that makes both guards reset together.
// Lint note: rst_ni is an asynchronous, active-low reset; the assertions
// at the end also read it in their disable clause, which the linter reports
// as a signal used both synchronously and asynchronously. Assertions make no
// hardware, so the note stands.
module tmu_write_guard #(
  parameter bit          FullCounter   = 1'b1,
  parameter int unsigned MaxUniqIds    = 4,
  parameter int unsigned TxnPerUniqId  = 4,
  parameter int unsigned PrescalerStep = 1,
  parameter int unsigned CntWidth      = 10,
  parameter int unsigned AddrWidth     = 48,
  // derived
  parameter int unsigned NumTxns   = MaxUniqIds * TxnPerUniqId,
  parameter int unsigned IdW       = (MaxUniqIds > 1) ? $clog2(MaxUniqIds) : 1,
  parameter int unsigned IdxW      = (NumTxns > 1) ? $clog2(NumTxns) : 1,
  parameter int unsigned TickWidth = (CntWidth > $clog2(PrescalerStep)) ?
                                     CntWidth - $clog2(PrescalerStep) : 1,
  parameter int unsigned NumPh     = tmu_pkg::NumWPhases,
  parameter int unsigned NumCnt    = FullCounter ? NumPh : 1
) (
  input  logic                                         clk_i,
  input  logic                                         rst_ni,
  // configuration
  input  logic                                         enable_i,
  input  logic                                         reset_en_i,
  input  logic [NumPh-1:0][tmu_pkg::BudgetWidth-1:0]   cfg_budget_i,
  input  logic [tmu_pkg::BudgetWidth-1:0]              cfg_beat_i,
  // AW as presented towards the subordinate (compacted ID)
  input  logic                                         aw_valid_i,
  input  logic [IdW-1:0]                               aw_id_i,
  input  logic [AddrWidth-1:0]                         aw_addr_i,
  input  logic [7:0]                                   aw_len_i,
  input  logic                                         aw_ready_i,
  output logic                                         aw_gate_o,
  // W
  input  logic                                         w_valid_i,
  input  logic                                         w_last_i,
  input  logic                                         w_ready_i,
  output logic                                         w_gate_o,
  // B from the subordinate, ready from the manager
  input  logic                                         b_valid_i,
  input  logic [IdW-1:0]                               b_id_i,
  input  logic                                         b_ready_i,
  // SLVERR responses generated during abort
  output logic                                         abort_b_valid_o,
  output logic [IdW-1:0]                               abort_b_id_o,
  input  logic                                         abort_b_ready_i,
  // fault handling
  output logic                                         severed_o,
  output logic                                         fault_o,
  input  logic                                         pass_i,       // TMU monitoring and no fault this cycle
  output logic                                         drained_o,
  input  logic                                         peer_drained_i,
  output logic                                         reset_req_o,
  input  logic                                         reset_ack_i,
  // logs
  output tmu_pkg::err_info_t                           err_o,
  output logic [AddrWidth-1:0]                         err_addr_o,
  output logic [NumCnt-1:0][TickWidth-1:0]             lat_o,
  output logic                                         done_o
);
  import tmu_pkg::*;

  localparam int unsigned NumEv = NumPh - 1;  // the last phase ends with the dequeue
  localparam logic [TickWidth-1:0] CntMax = '1;

  guard_state_e state_q, state_d;
  logic         monitor;
  assign monitor = (state_q == G_MONITOR);

  // ------------------------------------------------------------------ OTT
  logic                            enq_ok, enq_now, deq;
  logic [IdxW-1:0]                 enq_idx;
  logic [IdW-1:0]                  deq_id;
  logic [MaxUniqIds-1:0][IdxW-1:0] head_idx;
  logic [MaxUniqIds-1:0][$clog2(TxnPerUniqId+1)-1:0] id_cnt;
  logic [NumTxns-1:0]              slot_valid;
  logic [NumTxns-1:0][IdW-1:0]     slot_id;
  logic                            ei_pop, ei_empty, ott_clear;
  logic [IdxW-1:0]                 ei_head;

  tmu_ott #(
    .MaxUniqIds  (MaxUniqIds),
    .TxnPerUniqId(TxnPerUniqId),
    .UseEi       (1'b1)
  ) i_ott (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .clear_i      (ott_clear),
    .enq_valid_i  (enq_now),
    .enq_id_i     (aw_id_i),
    .enq_ok_o     (enq_ok),
    .enq_idx_o    (enq_idx),
    .deq_valid_i  (deq),
    .deq_id_i     (deq_id),
    .head_idx_o   (head_idx),
    .id_cnt_o     (id_cnt),
    .slot_valid_o (slot_valid),
    .slot_id_o    (slot_id),
    .ei_pop_i     (ei_pop),
    .ei_empty_o   (ei_empty),
    .ei_head_idx_o(ei_head)
  );

  // ------------------------------------------------------ prescaler/budget
  logic tick;
  tmu_prescaler #(.PrescalerStep(PrescalerStep)) i_presc (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .clear_i(1'b0),
    .tick_o (tick)
  );

  logic [BeatWidth-1:0]                pend_beats_q;
  logic [NumPh-1:0][TickWidth-1:0]     ph_budget;
  logic [TickWidth-1:0]                tot_budget;

  tmu_budget_alloc #(
    .NumPhases    (NumPh),
    .QueuePhase   (int'(W_PH_DATA_ENT)),
    .BurstPhase   (int'(W_PH_BURST)),
    .PrescalerStep(PrescalerStep),
    .CntWidth     (CntWidth)
  ) i_budget (
    .cfg_budget_i   (cfg_budget_i),
    .cfg_beat_i     (cfg_beat_i),
    .len_i          (aw_len_i),
    .pending_beats_i(pend_beats_q),
    .phase_budget_o (ph_budget),
    .total_budget_o (tot_budget)
  );

  // ------------------------------------------------------- LD payload
  logic [NumTxns-1:0][AddrWidth-1:0]           addr_q;
  logic [NumTxns-1:0][7:0]                     len_q;
  logic [NumTxns-1:0][8:0]                     beats_q;
  logic [NumTxns-1:0][NumEv-1:0]               ev_q;     // sticky event flags
  logic [NumTxns-1:0][NumCnt-1:0][TickWidth-1:0] cnt_q, bud_q;

  // current phase of a slot: first event not yet seen
  function automatic logic [2:0] phase_of(input logic [NumEv-1:0] ev);
    logic [2:0] p;
    p = 3'(NumEv);
    for (int i = NumEv - 1; i >= 0; i--) if (!ev[i]) p = 3'(i);
    return p;
  endfunction

  // ------------------------------------------------------- AW side
  logic            aw_pend_q;
  logic [IdxW-1:0] aw_pend_idx_q;
  logic [IdxW-1:0] aw_slot;
  logic            aw_hs;

  assign aw_gate_o = monitor && (aw_pend_q || enq_ok);
  assign enq_now   = pass_i && monitor && aw_valid_i && !aw_pend_q && enq_ok;
  assign aw_slot   = aw_pend_q ? aw_pend_idx_q : enq_idx;
  assign aw_hs     = pass_i && aw_valid_i && aw_gate_o && aw_ready_i;

  // ------------------------------------------------------- W side
  logic w_seen, w_hs_raw, w_hs, w_last_ok;
  assign w_gate_o  = monitor && !ei_empty;
  assign w_seen    = pass_i && w_valid_i && w_gate_o;
  assign w_hs_raw  = w_valid_i && w_gate_o && w_ready_i;
  assign w_hs      = pass_i && w_hs_raw;
  assign w_last_ok = (beats_q[ei_head] == {1'b0, len_q[ei_head]});  // this beat is beat len+1
  assign ei_pop    = w_hs && w_last_i;

  // ------------------------------------------------------- B side
  logic            b_known, b_early, b_hs;
  logic [IdxW-1:0] b_slot;
  assign b_known = (id_cnt[b_id_i] != '0);
  assign b_slot  = head_idx[b_id_i];
  assign b_early = !ev_q[b_slot][W_PH_AW_HS] || !ev_q[b_slot][W_PH_BURST];
  assign b_hs    = pass_i && monitor && b_valid_i && b_ready_i && b_known && !b_early;

  // ------------------------------------------------------- timeouts
  logic [NumTxns-1:0] tmo;
  always_comb begin
    for (int unsigned s = 0; s < NumTxns; s++) begin
      automatic int unsigned c = FullCounter ? int'(phase_of(ev_q[s])) : 0;
      tmo[s] = slot_valid[s] && (cnt_q[s][c] >= bud_q[s][c]);
    end
  end

  logic            tmo_any;
  logic [IdxW-1:0] tmo_slot;
  always_comb begin
    tmo_any  = 1'b0;
    tmo_slot = '0;
    for (int unsigned s = 0; s < NumTxns; s++) begin
      if (tmo[s] && !tmo_any) begin
        tmo_any  = 1'b1;
        tmo_slot = IdxW'(s);
      end
    end
  end

  // ------------------------------------------------------- fault detection
  err_info_t err_now;
  logic [AddrWidth-1:0] err_addr_now;
  logic own_err;
  always_comb begin
    err_now      = '0;
    err_addr_now = '0;
    if (tmo_any) begin
      err_now.code  = ERR_TIMEOUT;
      err_now.phase = phase_of(ev_q[tmo_slot]);
      err_now.id    = 8'(slot_id[tmo_slot]);
      err_now.slot  = 8'(tmo_slot);
      err_addr_now  = addr_q[tmo_slot];
    end else if (b_valid_i && !b_known) begin
      err_now.code  = ERR_UNREQ;
      err_now.phase = 3'(W_PH_B_WAIT);
      err_now.id    = 8'(b_id_i);
    end else if (b_valid_i && b_early) begin
      err_now.code  = ERR_EARLY_RSP;
      err_now.phase = phase_of(ev_q[b_slot]);
      err_now.id    = 8'(b_id_i);
      err_now.slot  = 8'(b_slot);
      err_addr_now  = addr_q[b_slot];
    end else if (w_hs_raw && (w_last_i != w_last_ok)) begin
      err_now.code  = ERR_LAST;
      err_now.phase = 3'(W_PH_BURST);
      err_now.id    = 8'(slot_id[ei_head]);
      err_now.slot  = 8'(ei_head);
      err_addr_now  = addr_q[ei_head];
    end
  end
  assign own_err = monitor && enable_i && (err_now.code != ERR_NONE);
  assign fault_o = own_err;

  // ------------------------------------------------------- abort sequencing
  logic            ab_found;
  logic [IdW-1:0]  ab_id;
  logic [IdxW-1:0] ab_slot;
  always_comb begin
    ab_found = 1'b0;
    ab_id    = '0;
    for (int unsigned i = 0; i < MaxUniqIds; i++) begin
      if (id_cnt[i] != '0 && !ab_found) begin
        ab_found = 1'b1;
        ab_id    = IdW'(i);
      end
    end
    ab_slot = head_idx[ab_id];
  end
  // a write that was never accepted from the manager is dropped silently
  assign abort_b_valid_o = (state_q == G_ABORT) && ab_found && ev_q[ab_slot][W_PH_AW_HS];
  assign abort_b_id_o    = ab_id;

  always_comb begin
    deq    = 1'b0;
    deq_id = b_id_i;
    if (state_q == G_ABORT) begin
      deq_id = ab_id;
      deq    = ab_found && (!ev_q[ab_slot][W_PH_AW_HS] || abort_b_ready_i);
    end else if (b_hs) begin
      deq = 1'b1;
    end
  end

  always_comb begin
    state_d   = state_q;
    ott_clear = 1'b0;
    unique case (state_q)
      G_MONITOR: if (!pass_i) state_d = G_ABORT;
      G_ABORT:   if (!ab_found) state_d = G_WAIT;
      G_WAIT:    if (peer_drained_i) state_d = G_RESET;
      G_RESET:   if (reset_ack_i || !reset_en_i) begin
                   state_d   = G_MONITOR;
                   ott_clear = 1'b1;
                 end
      default:   state_d = G_MONITOR;
    endcase
  end

  assign severed_o   = !monitor;
  assign drained_o   = (state_q == G_WAIT) || (state_q == G_RESET);
  assign reset_req_o = (state_q == G_RESET) && reset_en_i;

  // ------------------------------------------------------- registers
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= G_MONITOR;
      aw_pend_q     <= 1'b0;
      aw_pend_idx_q <= '0;
      pend_beats_q  <= '0;
      addr_q        <= '0;
      len_q         <= '0;
      beats_q       <= '0;
      ev_q          <= '0;
      cnt_q         <= '0;
      bud_q         <= '0;
      err_o         <= '0;
      err_addr_o    <= '0;
      lat_o         <= '0;
      done_o        <= 1'b0;
    end else begin
      state_q <= state_d;
      done_o  <= b_hs;
      if (own_err) begin
        err_o      <= err_now;
        err_addr_o <= err_addr_now;
      end
      if (!monitor) begin
        aw_pend_q    <= 1'b0;
        pend_beats_q <= '0;
      end else begin
        // pending request bookkeeping
        if (aw_hs)        aw_pend_q <= 1'b0;
        else if (enq_now) aw_pend_q <= 1'b1;
        if (enq_now)      aw_pend_idx_q <= enq_idx;
        pend_beats_q <= pend_beats_q + (enq_now ? BeatWidth'(aw_len_i) + 1'b1 : '0)
                                     - (w_hs ? BeatWidth'(1) : '0);
        // counters of live slots
        for (int unsigned s = 0; s < NumTxns; s++) begin
          automatic int unsigned c = FullCounter ? int'(phase_of(ev_q[s])) : 0;
          if (slot_valid[s] && tick && cnt_q[s][c] != CntMax && c < NumCnt)
            cnt_q[s][c] <= cnt_q[s][c] + 1'b1;
        end
        // sticky event flags
        if (aw_hs) ev_q[aw_slot][W_PH_AW_HS] <= 1'b1;
        if (w_seen) ev_q[ei_head][W_PH_DATA_ENT] <= 1'b1;
        if (w_hs) begin
          ev_q[ei_head][W_PH_W_HS] <= 1'b1;
          beats_q[ei_head]         <= beats_q[ei_head] + 1'b1;
          if (w_last_i) ev_q[ei_head][W_PH_BURST] <= 1'b1;
        end
        if (pass_i && b_valid_i && b_known && !b_early) ev_q[b_slot][W_PH_B_WAIT] <= 1'b1;
        if (b_hs) begin
          for (int unsigned c = 0; c < NumCnt; c++) lat_o[c] <= cnt_q[b_slot][c];
        end
        // new transaction
        if (enq_now) begin
          addr_q[enq_idx]  <= aw_addr_i;
          len_q[enq_idx]   <= aw_len_i;
          beats_q[enq_idx] <= '0;
          ev_q[enq_idx]    <= NumEv'(aw_hs);
          cnt_q[enq_idx]   <= '0;
          cnt_q[enq_idx][0] <= TickWidth'(tick);
          if (FullCounter) begin
            for (int unsigned c = 0; c < NumCnt; c++) bud_q[enq_idx][c] <= ph_budget[c];
          end else begin
            bud_q[enq_idx][0] <= tot_budget;
          end
        end
      end
    end
  end

  // ------------------------------------------------------- assertions
  // The compacted ID of a waiting request must not change (AXI4 stability).
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (aw_valid_i && aw_gate_o && !aw_ready_i) |=> (!monitor || $stable(aw_id_i)))
    else $error("tmu_write_guard: AW changed while waiting");
  // Abort responses are only produced while aborting.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   abort_b_valid_o |-> (state_q == G_ABORT))
    else $error("tmu_write_guard: abort response outside ABORT");
endmodule
