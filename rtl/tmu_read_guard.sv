// tmu_read_guard: Read Guard of the TMU (AR and R channels).
//
// What it does. Every read request is entered into the guard's Outstanding
// Transaction Table (tmu_ott) when its ar_valid is seen and followed through
// four phases (tmu_pkg::r_phase_e): AR handshake (AR0), ARREADY -> first
// RVALID (AR1), first RVALID -> RREADY (R0) and first -> last beat (R1). The
// read leaves the table on the handshake of its last beat.
//
// How. R beats carry an ID and reads of different IDs may interleave, so
// each beat is matched to the head of its ID's list in the HT table; the
// EI FIFO is not needed here. Sticky per-slot event flags are set on the
// clock an event happens; counters advance on prescaler ticks. With
// FullCounter = 1 there is one counter and budget per phase, with
// FullCounter = 0 one counter per read against the sum of the phase budgets
// (ARVALID to the RLAST handshake).
//
// Checks: timeout, unrequested response (R for an ID with nothing
// outstanding), early response (R before the AR handshake) and burst length
// (r_last not on beat ARLEN+1). On a fault, or a fault anywhere in the TMU
// (pass_i low), the guard stops monitoring, returns the remaining beats
// of every accepted read with SLVERR on abort_r_* (per ID in order, r_last
// on the final beat), drops reads never accepted, waits until the write
// guard has drained too, holds reset_req_o until reset_ack_i, clears its
// table and resumes.
//
// Interface timing as in tmu_write_guard: ar_gate_o is combinational,
// fault_o pulses in the detection cycle, err_o/lat_o are registered logs.
// Paper: read phases, OTT, budgets, prescaler, checks, SLVERR abort and
// reset request. Own choices: ID-based matching without the EI FIFO, the
// rules checked and the abort order.
// Lint note: rst_ni is an asynchronous, active-low reset; the assertions
// at the end also read it in their disable clause, which the linter reports
// as a signal used both synchronously and asynchronously. Assertions make no
// hardware, so the note stands.
// The table's EI outputs (ei_empty, ei_head) are not used: R beats carry
// their ID and are matched per ID, so the read table is built without EI.
module tmu_read_guard #(
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
  parameter int unsigned NumPh     = tmu_pkg::NumRPhases,
  parameter int unsigned NumCnt    = FullCounter ? NumPh : 1
) (
  input  logic                                         clk_i,
  input  logic                                         rst_ni,
  // configuration
  input  logic                                         enable_i,
  input  logic                                         reset_en_i,
  input  logic [NumPh-1:0][tmu_pkg::BudgetWidth-1:0]   cfg_budget_i,
  input  logic [tmu_pkg::BudgetWidth-1:0]              cfg_beat_i,
  // AR as presented towards the subordinate (compacted ID)
  input  logic                                         ar_valid_i,
  input  logic [IdW-1:0]                               ar_id_i,
  input  logic [AddrWidth-1:0]                         ar_addr_i,
  input  logic [7:0]                                   ar_len_i,
  input  logic                                         ar_ready_i,
  output logic                                         ar_gate_o,
  // R from the subordinate, ready from the manager
  input  logic                                         r_valid_i,
  input  logic [IdW-1:0]                               r_id_i,
  input  logic                                         r_last_i,
  input  logic                                         r_ready_i,
  // SLVERR beats generated during abort
  output logic                                         abort_r_valid_o,
  output logic [IdW-1:0]                               abort_r_id_o,
  output logic                                         abort_r_last_o,
  input  logic                                         abort_r_ready_i,
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

  localparam int unsigned NumEv = NumPh - 1;
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
  logic                            ei_empty, ott_clear;
  logic [IdxW-1:0]                 ei_head;

  tmu_ott #(
    .MaxUniqIds  (MaxUniqIds),
    .TxnPerUniqId(TxnPerUniqId),
    .UseEi       (1'b0)
  ) i_ott (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .clear_i      (ott_clear),
    .enq_valid_i  (enq_now),
    .enq_id_i     (ar_id_i),
    .enq_ok_o     (enq_ok),
    .enq_idx_o    (enq_idx),
    .deq_valid_i  (deq),
    .deq_id_i     (deq_id),
    .head_idx_o   (head_idx),
    .id_cnt_o     (id_cnt),
    .slot_valid_o (slot_valid),
    .slot_id_o    (slot_id),
    .ei_pop_i     (1'b0),
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
    .QueuePhase   (int'(R_PH_DATA_ENT)),
    .BurstPhase   (int'(R_PH_BURST)),
    .PrescalerStep(PrescalerStep),
    .CntWidth     (CntWidth)
  ) i_budget (
    .cfg_budget_i   (cfg_budget_i),
    .cfg_beat_i     (cfg_beat_i),
    .len_i          (ar_len_i),
    .pending_beats_i(pend_beats_q),
    .phase_budget_o (ph_budget),
    .total_budget_o (tot_budget)
  );

  // ------------------------------------------------------- LD payload
  logic [NumTxns-1:0][AddrWidth-1:0]             addr_q;
  logic [NumTxns-1:0][7:0]                       len_q;
  logic [NumTxns-1:0][8:0]                       beats_q;
  logic [NumTxns-1:0][NumEv-1:0]                 ev_q;
  logic [NumTxns-1:0][NumCnt-1:0][TickWidth-1:0] cnt_q, bud_q;

  function automatic logic [1:0] phase_of(input logic [NumEv-1:0] ev);
    logic [1:0] p;
    p = 2'(NumEv);
    for (int i = NumEv - 1; i >= 0; i--) if (!ev[i]) p = 2'(i);
    return p;
  endfunction

  // ------------------------------------------------------- AR side
  logic            ar_pend_q;
  logic [IdxW-1:0] ar_pend_idx_q;
  logic [IdxW-1:0] ar_slot;
  logic            ar_hs;

  assign ar_gate_o = monitor && (ar_pend_q || enq_ok);
  assign enq_now   = pass_i && monitor && ar_valid_i && !ar_pend_q && enq_ok;
  assign ar_slot   = ar_pend_q ? ar_pend_idx_q : enq_idx;
  assign ar_hs     = pass_i && ar_valid_i && ar_gate_o && ar_ready_i;

  // ------------------------------------------------------- R side
  logic            r_known, r_early, r_seen, r_hs_raw, r_hs, r_last_ok;
  logic [IdxW-1:0] r_slot;
  assign r_known   = (id_cnt[r_id_i] != '0);
  assign r_slot    = head_idx[r_id_i];
  assign r_early   = !ev_q[r_slot][R_PH_AR_HS];
  assign r_seen    = pass_i && monitor && r_valid_i && r_known && !r_early;
  assign r_hs_raw  = r_valid_i && r_ready_i && r_known && !r_early;
  assign r_hs      = r_seen && r_ready_i;
  assign r_last_ok = (beats_q[r_slot] == {1'b0, len_q[r_slot]});

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
  err_info_t            err_now;
  logic [AddrWidth-1:0] err_addr_now;
  logic                 own_err;
  always_comb begin
    err_now      = '0;
    err_addr_now = '0;
    if (tmo_any) begin
      err_now.code  = ERR_TIMEOUT;
      err_now.phase = 3'(phase_of(ev_q[tmo_slot]));
      err_now.id    = 8'(slot_id[tmo_slot]);
      err_now.slot  = 8'(tmo_slot);
      err_addr_now  = addr_q[tmo_slot];
    end else if (r_valid_i && !r_known) begin
      err_now.code  = ERR_UNREQ;
      err_now.phase = 3'(R_PH_DATA_ENT);
      err_now.id    = 8'(r_id_i);
    end else if (r_valid_i && r_early) begin
      err_now.code  = ERR_EARLY_RSP;
      err_now.phase = 3'(R_PH_AR_HS);
      err_now.id    = 8'(r_id_i);
      err_now.slot  = 8'(r_slot);
      err_addr_now  = addr_q[r_slot];
    end else if (r_hs_raw && (r_last_i != r_last_ok)) begin
      err_now.code  = ERR_LAST;
      err_now.phase = 3'(R_PH_BURST);
      err_now.id    = 8'(r_id_i);
      err_now.slot  = 8'(r_slot);
      err_addr_now  = addr_q[r_slot];
    end
  end
  assign own_err = monitor && enable_i && (err_now.code != ERR_NONE);
  assign fault_o = own_err;

  // ------------------------------------------------------- abort sequencing
  logic            ab_found;
  logic [IdW-1:0]  ab_id;
  logic [IdxW-1:0] ab_slot;
  logic            ab_accepted, ab_last;
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
  assign ab_accepted     = ev_q[ab_slot][R_PH_AR_HS];
  assign ab_last         = (beats_q[ab_slot] >= {1'b0, len_q[ab_slot]});
  assign abort_r_valid_o = (state_q == G_ABORT) && ab_found && ab_accepted;
  assign abort_r_id_o    = ab_id;
  assign abort_r_last_o  = ab_last;

  always_comb begin
    deq    = 1'b0;
    deq_id = r_id_i;
    if (state_q == G_ABORT) begin
      deq_id = ab_id;
      deq    = ab_found && (!ab_accepted || (abort_r_ready_i && ab_last));
    end else if (r_hs && r_last_i) begin
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
      ar_pend_q     <= 1'b0;
      ar_pend_idx_q <= '0;
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
      done_o  <= r_hs && r_last_i;
      if (own_err) begin
        err_o      <= err_now;
        err_addr_o <= err_addr_now;
      end
      if (!monitor) begin
        ar_pend_q    <= 1'b0;
        pend_beats_q <= '0;
        if (abort_r_valid_o && abort_r_ready_i) beats_q[ab_slot] <= beats_q[ab_slot] + 1'b1;
      end else begin
        if (ar_hs)        ar_pend_q <= 1'b0;
        else if (enq_now) ar_pend_q <= 1'b1;
        if (enq_now)      ar_pend_idx_q <= enq_idx;
        pend_beats_q <= pend_beats_q + (enq_now ? BeatWidth'(ar_len_i) + 1'b1 : '0)
                                     - (r_hs ? BeatWidth'(1) : '0);
        for (int unsigned s = 0; s < NumTxns; s++) begin
          automatic int unsigned c = FullCounter ? int'(phase_of(ev_q[s])) : 0;
          if (slot_valid[s] && tick && cnt_q[s][c] != CntMax && c < NumCnt)
            cnt_q[s][c] <= cnt_q[s][c] + 1'b1;
        end
        if (ar_hs)  ev_q[ar_slot][R_PH_AR_HS] <= 1'b1;
        if (r_seen) ev_q[r_slot][R_PH_DATA_ENT] <= 1'b1;
        if (r_hs) begin
          ev_q[r_slot][R_PH_R_HS] <= 1'b1;
          beats_q[r_slot]         <= beats_q[r_slot] + 1'b1;
          if (r_last_i) begin
            // include the cycle of the last beat itself
            for (int unsigned c = 0; c < NumCnt; c++)
              lat_o[c] <= cnt_q[r_slot][c] + TickWidth'(tick && cnt_q[r_slot][c] != CntMax &&
                          (!FullCounter || c == int'(phase_of(ev_q[r_slot]))));
          end
        end
        if (enq_now) begin
          addr_q[enq_idx]   <= ar_addr_i;
          len_q[enq_idx]    <= ar_len_i;
          beats_q[enq_idx]  <= '0;
          ev_q[enq_idx]     <= NumEv'(ar_hs);
          cnt_q[enq_idx]    <= '0;
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
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (ar_valid_i && ar_gate_o && !ar_ready_i) |=> (!monitor || $stable(ar_id_i)))
    else $error("tmu_read_guard: AR changed while waiting");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   abort_r_valid_o |-> (state_q == G_ABORT))
    else $error("tmu_read_guard: abort response outside ABORT");
endmodule
