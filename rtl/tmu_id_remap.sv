// tmu_id_remap: AXI ID remapper at the manager side of the TMU.
//
// The interconnect may use wide, sparse transaction IDs; the guards track
// at most MaxUniqIds distinct IDs per direction. For each direction this
// block keeps a table of MaxUniqIds slots, each holding an original ID and
// the number of its transactions still outstanding. A request whose ID is
// already in the table reuses that slot; otherwise it takes the lowest free
// slot. The slot number is the compacted ID seen by the guards and the
// subordinate. Responses carry the compacted ID and get their original ID
// back from the table. A slot is released when its count returns to zero
// (B handshake, or handshake of the last R beat, at the manager side).
// When no slot can take a request, or its slot already has TxnPerUniqId
// transactions, the request is stalled (valid not forwarded, ready low).
// The slot chosen for a request that waits for its handshake is locked so
// that its compacted ID does not change while valid is held.
// Timing: purely combinational between the two sides; the tables update on
// the clock edge of each handshake.
// The remapper itself follows the paper; its table organisation, stalling
// and locking are this design's choices.
module tmu_id_remap #(
  parameter int unsigned MstIdWidth   = 8,
  parameter int unsigned MaxUniqIds   = 4,
  parameter int unsigned TxnPerUniqId = 4,
  // derived
  parameter int unsigned IdW  = (MaxUniqIds > 1) ? $clog2(MaxUniqIds) : 1,
  parameter int unsigned CntW = $clog2(TxnPerUniqId + 1)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // write address: manager side -> compacted side
  input  logic                  mst_aw_valid_i,
  input  logic [MstIdWidth-1:0] mst_aw_id_i,
  output logic                  mst_aw_ready_o,
  output logic                  int_aw_valid_o,
  output logic [IdW-1:0]        int_aw_id_o,
  input  logic                  int_aw_ready_i,
  // write response: compacted ID in, original ID out
  input  logic [IdW-1:0]        int_b_id_i,
  output logic [MstIdWidth-1:0] mst_b_id_o,
  input  logic                  mst_b_hs_i,      // B handshake at the manager side
  // read address
  input  logic                  mst_ar_valid_i,
  input  logic [MstIdWidth-1:0] mst_ar_id_i,
  output logic                  mst_ar_ready_o,
  output logic                  int_ar_valid_o,
  output logic [IdW-1:0]        int_ar_id_o,
  input  logic                  int_ar_ready_i,
  // read data
  input  logic [IdW-1:0]        int_r_id_i,
  output logic [MstIdWidth-1:0] mst_r_id_o,
  input  logic                  mst_r_last_hs_i  // handshake of a last R beat
);
  typedef struct packed {
    logic [MstIdWidth-1:0] id;
    logic [CntW-1:0]       cnt;
  } slot_t;

  // one direction's table, written out twice through a generate loop
  logic [1:0]                  req_valid, req_ready, out_valid, out_ready, rel;
  logic [1:0][MstIdWidth-1:0]  req_id;
  logic [1:0][IdW-1:0]         out_id, rel_id;
  logic [1:0][MaxUniqIds-1:0][MstIdWidth-1:0] tab_id;

  assign req_valid = {mst_ar_valid_i, mst_aw_valid_i};
  assign req_id    = {mst_ar_id_i, mst_aw_id_i};
  assign out_ready = {int_ar_ready_i, int_aw_ready_i};
  assign rel       = {mst_r_last_hs_i, mst_b_hs_i};
  assign rel_id    = {int_r_id_i, int_b_id_i};

  for (genvar d = 0; d < 2; d++) begin : gen_dir
    slot_t [MaxUniqIds-1:0] tab_q;
    logic                   lock_q;
    logic [IdW-1:0]         lock_slot_q;
    logic                   hit, free;
    logic [IdW-1:0]         hit_slot, free_slot, slot;
    logic                   ok, hs;

    always_comb begin
      hit = 1'b0; hit_slot = '0; free = 1'b0; free_slot = '0;
      for (int unsigned i = 0; i < MaxUniqIds; i++) begin
        if (tab_q[i].cnt != '0 && tab_q[i].id == req_id[d] && !hit) begin
          hit = 1'b1; hit_slot = IdW'(i);
        end
        if (tab_q[i].cnt == '0 && !free) begin
          free = 1'b1; free_slot = IdW'(i);
        end
      end
      if (lock_q)   slot = lock_slot_q;
      else if (hit) slot = hit_slot;
      else          slot = free_slot;
      ok = (lock_q || hit || free) && (tab_q[slot].cnt < CntW'(TxnPerUniqId));
    end

    assign out_valid[d] = req_valid[d] && ok;
    assign out_id[d]    = slot;
    assign req_ready[d] = out_ready[d] && ok;
    assign hs           = out_valid[d] && out_ready[d];

    logic [MaxUniqIds-1:0] inc, dec;
    always_comb begin
      for (int unsigned i = 0; i < MaxUniqIds; i++) begin
        inc[i] = hs && (slot == IdW'(i));
        dec[i] = rel[d] && (rel_id[d] == IdW'(i)) && (tab_q[i].cnt != '0);
      end
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        tab_q       <= '0;
        lock_q      <= 1'b0;
        lock_slot_q <= '0;
      end else begin
        if (out_valid[d] && !out_ready[d]) begin
          lock_q      <= 1'b1;
          lock_slot_q <= slot;
        end else if (hs) begin
          lock_q <= 1'b0;
        end
        for (int unsigned i = 0; i < MaxUniqIds; i++) begin
          tab_q[i].cnt <= tab_q[i].cnt + CntW'(inc[i]) - CntW'(dec[i]);
          if (inc[i]) tab_q[i].id <= req_id[d];
        end
      end
    end

    for (genvar i = 0; i < MaxUniqIds; i++) begin : gen_id
      assign tab_id[d][i] = tab_q[i].id;
    end
  end

  assign mst_aw_ready_o = req_ready[0];
  assign int_aw_valid_o = out_valid[0];
  assign int_aw_id_o    = out_id[0];
  assign mst_ar_ready_o = req_ready[1];
  assign int_ar_valid_o = out_valid[1];
  assign int_ar_id_o    = out_id[1];
  assign mst_b_id_o     = tab_id[0][int_b_id_i];
  assign mst_r_id_o     = tab_id[1][int_r_id_i];
endmodule
