// tb_tmu_ott: random enqueue / dequeue / EI-pop traffic on the Outstanding
// Transaction Table, compared every cycle with a reference model kept here as
// one SystemVerilog queue per ID, a free-slot bitmap (lowest free slot is
// allocated) and a queue for the EI order. Checks head pointers, per-ID
// counts, enq_ok (stall when the ID or the table is full), the allocated
// slot, slot ownership, the EI head, and clear.
module tb_tmu_ott;
  localparam int NI = 4, TPI = 4, NT = NI * TPI;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic enq_v, deq_v, ei_pop;
  logic [1:0] enq_id, deq_id;
  logic enq_ok, ei_empty;
  logic [3:0] enq_idx, ei_head;
  logic [NI-1:0][3:0] head_idx;
  logic [NI-1:0][2:0] id_cnt;
  logic [NT-1:0] slot_valid;
  logic [NT-1:0][1:0] slot_id;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tmu_ott #(.MaxUniqIds(NI), .TxnPerUniqId(TPI), .UseEi(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .enq_valid_i(enq_v), .enq_id_i(enq_id), .enq_ok_o(enq_ok), .enq_idx_o(enq_idx),
    .deq_valid_i(deq_v), .deq_id_i(deq_id),
    .head_idx_o(head_idx), .id_cnt_o(id_cnt),
    .slot_valid_o(slot_valid), .slot_id_o(slot_id),
    .ei_pop_i(ei_pop), .ei_empty_o(ei_empty), .ei_head_idx_o(ei_head));

  // reference model
  int q[NI][$];
  int ei[$];
  bit used[NT];

  function automatic int lowest_free();
    for (int i = 0; i < NT; i++) if (!used[i]) return i;
    return -1;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lf, peak;
    bit exp_ok;
    enq_v = 0; deq_v = 0; ei_pop = 0; enq_id = 0; deq_id = 0;
    peak = 0;
    foreach (used[i]) used[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // stimulus, biased towards filling up during the first half of each 400-cycle period
      enq_v  = ($urandom_range(0, 99) < (((cyc / 400) % 2 == 0) ? 70 : 30));
      enq_id = 2'($urandom_range(0, NI - 1));
      deq_id = 2'($urandom_range(0, NI - 1));
      // as in the write guard, a transaction leaves the EI order before it completes
      deq_v  = (q[deq_id].size() > 0) && ($urandom_range(0, 99) < 50);
      if (deq_v) foreach (ei[k]) if (ei[k] == q[deq_id][0]) deq_v = 0;
      ei_pop = (ei.size() > 0) && ($urandom_range(0, 99) < 50);
      #1;
      // compare outputs with the model
      lf = lowest_free();
      exp_ok = (lf >= 0) && (q[enq_id].size() < TPI);
      chk(enq_ok == exp_ok, "enq_ok");
      if (exp_ok) chk(enq_idx == 4'(lf), "allocated slot");
      for (int i = 0; i < NI; i++) begin
        chk(id_cnt[i] == 3'(q[i].size()), $sformatf("per-ID count id%0d dut %0d model %0d", i, id_cnt[i], q[i].size()));
        if (q[i].size() > 0) chk(head_idx[i] == 4'(q[i][0]), "head pointer");
      end
      for (int s = 0; s < NT; s++) chk(slot_valid[s] == used[s], "slot valid");
      chk(ei_empty == (ei.size() == 0), "EI empty");
      if (ei.size() > 0) chk(ei_head == 4'(ei[0]), "EI head");
      // advance the model as the table will at the edge
      @(posedge clk);
      if (deq_v) begin
        int s;
        s = q[deq_id].pop_front();
        used[s] = 0;
        chk(slot_id[s] == deq_id, "slot owner");
      end
      if (enq_v && exp_ok) begin
        used[lf] = 1;
        q[enq_id].push_back(lf);
        ei.push_back(lf);
      end
      if (ei_pop) void'(ei.pop_front());
      if (lf < 0) peak++;
    end
    chk(peak > 0, "table became full at least once");
    // clear empties everything
    @(negedge clk); enq_v = 0; deq_v = 0; ei_pop = 0; clear = 1;
    @(negedge clk); clear = 0; #1;
    chk(slot_valid == '0 && ei_empty && id_cnt == '0, "clear");
    $display("full cycles: %0d", peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
