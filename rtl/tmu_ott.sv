// tmu_ott: Outstanding Transaction Table (OTT) of one TMU guard.
//
// Three linked tables keep track of every outstanding transaction:
//   * ID Head-Tail (HT) table, one row per compacted ID: head and tail
//     pointers into the LD table and the number of transactions queued for
//     that ID, so that each ID forms a FIFO and completes in order (AXI4
//     ordering rule for one ID);
//   * Linked Data (LD) table, NumTxns = MaxUniqIds x TxnPerUniqId slots:
//     a valid (not free) flag, the owning ID and the next pointer of the
//     per-ID list. The guards keep the rest of each transaction's record
//     (address, state, budgets, counters) in arrays indexed by the same slot;
//   * Enqueue Index (EI) table, a FIFO of slot numbers in request order, so
//     that write data beats, which carry no ID, are matched to their address
//     requests in order.
// enq_valid_i stores a new transaction for enq_id_i in slot enq_idx_o (the
// lowest free slot) when enq_ok_o is high; enq_ok_o is low when the LD table
// or that ID's list is full (the guard then stalls the request).
// deq_valid_i removes the head of deq_id_i's list; ei_pop_i removes the
// oldest EI entry. All updates take effect at the next clock edge; enqueue,
// dequeue and EI pop may happen in the same cycle. clear_i empties the table.
// Table structure and fields follow the paper's OTT description; the
// lowest-free allocation and indexing the HT table directly by the compacted
// ID are this design's choices.
// Lint note: rst_ni is an asynchronous, active-low reset; the assertions
// at the end also read it in their disable clause, which the linter reports
// as a signal used both synchronously and asynchronously. Assertions make no
// hardware, so the note stands.
// With UseEi = 0 (the read guard) the EI FIFO is not built and ei_pop_i is
// left unused.
module tmu_ott #(
  parameter int unsigned MaxUniqIds   = 4,
  parameter int unsigned TxnPerUniqId = 4,
  parameter bit          UseEi        = 1'b1,
  // derived
  parameter int unsigned NumTxns = MaxUniqIds * TxnPerUniqId,
  parameter int unsigned IdW     = (MaxUniqIds > 1) ? $clog2(MaxUniqIds) : 1,
  parameter int unsigned IdxW    = (NumTxns > 1) ? $clog2(NumTxns) : 1,
  parameter int unsigned CntW    = $clog2(TxnPerUniqId + 1)
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic                             clear_i,
  // enqueue
  input  logic                             enq_valid_i,
  input  logic [IdW-1:0]                   enq_id_i,
  output logic                             enq_ok_o,
  output logic [IdxW-1:0]                  enq_idx_o,
  // dequeue (head of one ID)
  input  logic                             deq_valid_i,
  input  logic [IdW-1:0]                   deq_id_i,
  // HT view
  output logic [MaxUniqIds-1:0][IdxW-1:0]  head_idx_o,
  output logic [MaxUniqIds-1:0][CntW-1:0]  id_cnt_o,
  // LD view
  output logic [NumTxns-1:0]               slot_valid_o,
  output logic [NumTxns-1:0][IdW-1:0]      slot_id_o,
  // EI view
  input  logic                             ei_pop_i,
  output logic                             ei_empty_o,
  output logic [IdxW-1:0]                  ei_head_idx_o
);
  // HT table
  logic [MaxUniqIds-1:0][IdxW-1:0] head_q, head_d, tail_q, tail_d;
  logic [MaxUniqIds-1:0][CntW-1:0] cnt_q, cnt_d;
  // LD table
  logic [NumTxns-1:0]              valid_q, valid_d;
  logic [NumTxns-1:0][IdW-1:0]     id_q, id_d;
  logic [NumTxns-1:0][IdxW-1:0]    next_q, next_d;

  logic            free_found;
  logic [IdxW-1:0] free_idx;
  logic            enq, deq;

  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int unsigned i = 0; i < NumTxns; i++) begin
      if (!valid_q[i] && !free_found) begin
        free_found = 1'b1;
        free_idx   = IdxW'(i);
      end
    end
  end

  assign enq_ok_o  = free_found && (cnt_q[enq_id_i] < CntW'(TxnPerUniqId));
  assign enq_idx_o = free_idx;
  assign enq       = enq_valid_i && enq_ok_o;
  assign deq       = deq_valid_i && (cnt_q[deq_id_i] != '0);

  always_comb begin
    head_d  = head_q;
    tail_d  = tail_q;
    cnt_d   = cnt_q;
    valid_d = valid_q;
    id_d    = id_q;
    next_d  = next_q;
    if (deq) begin
      valid_d[head_q[deq_id_i]] = 1'b0;
      head_d[deq_id_i]          = next_q[head_q[deq_id_i]];
      cnt_d[deq_id_i]           = cnt_q[deq_id_i] - 1'b1;
    end
    if (enq) begin
      valid_d[free_idx] = 1'b1;
      id_d[free_idx]    = enq_id_i;
      next_d[free_idx]  = free_idx;
      if (cnt_d[enq_id_i] == '0) begin
        head_d[enq_id_i] = free_idx;
      end else begin
        next_d[tail_q[enq_id_i]] = free_idx;
      end
      tail_d[enq_id_i] = free_idx;
      cnt_d[enq_id_i]  = cnt_d[enq_id_i] + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      head_q  <= '0;
      tail_q  <= '0;
      cnt_q   <= '0;
      valid_q <= '0;
      id_q    <= '0;
      next_q  <= '0;
    end else if (clear_i) begin
      cnt_q   <= '0;
      valid_q <= '0;
    end else begin
      head_q  <= head_d;
      tail_q  <= tail_d;
      cnt_q   <= cnt_d;
      valid_q <= valid_d;
      id_q    <= id_d;
      next_q  <= next_d;
    end
  end

  assign head_idx_o   = head_q;
  assign id_cnt_o     = cnt_q;
  assign slot_valid_o = valid_q;
  assign slot_id_o    = id_q;

  // EI table: FIFO of slot numbers in request order.
  if (UseEi) begin : gen_ei
    localparam int unsigned PtrW = IdxW;
    logic [NumTxns-1:0][IdxW-1:0] ei_q;
    logic [PtrW-1:0]              rd_q, wr_q;
    logic [IdxW:0]                fill_q;
    logic                         pop;
    assign pop = ei_pop_i && (fill_q != '0);
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        ei_q   <= '0;
        rd_q   <= '0;
        wr_q   <= '0;
        fill_q <= '0;
      end else if (clear_i) begin
        rd_q   <= '0;
        wr_q   <= '0;
        fill_q <= '0;
      end else begin
        if (enq) begin
          ei_q[wr_q] <= free_idx;
          wr_q       <= (wr_q == PtrW'(NumTxns - 1)) ? '0 : wr_q + 1'b1;
        end
        if (pop) rd_q <= (rd_q == PtrW'(NumTxns - 1)) ? '0 : rd_q + 1'b1;
        fill_q <= fill_q + (IdxW+1)'(enq) - (IdxW+1)'(pop);
      end
    end
    assign ei_empty_o    = (fill_q == '0);
    assign ei_head_idx_o = ei_q[rd_q];
  end else begin : gen_no_ei
    assign ei_empty_o    = 1'b1;
    assign ei_head_idx_o = '0;
  end

  // A dequeue always names an ID that has something outstanding.
  assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
                   deq_valid_i |-> (cnt_q[deq_id_i] != '0))
    else $error("tmu_ott: dequeue of an empty ID list");
endmodule
