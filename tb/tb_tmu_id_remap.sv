// tb_tmu_id_remap: random write traffic with 6 different 8-bit manager IDs
// through a remapper with 4 slots and 4 transactions per slot, and random
// completions. A model kept here (original ID -> slot, outstanding count)
// checks that an ID keeps its slot while it has outstanding writes, that no
// two IDs share a slot, that responses get their original ID back, that a
// request stalls exactly when no slot can take it, and that the compacted ID
// stays stable while a request waits. A short directed sequence checks the
// read direction the same way.
module tb_tmu_id_remap;
  logic clk = 1'b0, rst_n = 1'b0;
  logic       aw_v, aw_rdy_o, int_aw_v, int_aw_rdy, b_hs;
  logic [7:0] aw_id, b_id_o;
  logic [1:0] int_aw_id, int_b_id;
  logic       ar_v, ar_rdy_o, int_ar_v, int_ar_rdy, r_hs;
  logic [7:0] ar_id, r_id_o;
  logic [1:0] int_ar_id, int_r_id;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tmu_id_remap #(.MstIdWidth(8), .MaxUniqIds(4), .TxnPerUniqId(4)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mst_aw_valid_i(aw_v), .mst_aw_id_i(aw_id), .mst_aw_ready_o(aw_rdy_o),
    .int_aw_valid_o(int_aw_v), .int_aw_id_o(int_aw_id), .int_aw_ready_i(int_aw_rdy),
    .int_b_id_i(int_b_id), .mst_b_id_o(b_id_o), .mst_b_hs_i(b_hs),
    .mst_ar_valid_i(ar_v), .mst_ar_id_i(ar_id), .mst_ar_ready_o(ar_rdy_o),
    .int_ar_valid_o(int_ar_v), .int_ar_id_o(int_ar_id), .int_ar_ready_i(int_ar_rdy),
    .int_r_id_i(int_r_id), .mst_r_id_o(r_id_o), .mst_r_last_hs_i(r_hs));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [7:0] Ids[6] = '{8'h03, 8'h41, 8'h7f, 8'h80, 8'hc5, 8'hfe};
  int  slot_cnt[4];
  logic [7:0] slot_orig[4];
  int  stalls = 0;

  function automatic int slot_of(input logic [7:0] id);
    for (int i = 0; i < 4; i++) if (slot_cnt[i] > 0 && slot_orig[i] == id) return i;
    return -1;
  endfunction
  function automatic bit can_take(input logic [7:0] id);
    int s = slot_of(id);
    if (s >= 0) return slot_cnt[s] < 4;
    for (int i = 0; i < 4; i++) if (slot_cnt[i] == 0) return 1;
    return 0;
  endfunction

  initial begin
    logic [1:0] held_id;
    bit         held, done_req;
    int         s, pick;
    aw_v = 0; aw_id = '0; int_aw_rdy = 0; int_b_id = '0; b_hs = 0;
    ar_v = 0; ar_id = '0; int_ar_rdy = 0; int_r_id = '0; r_hs = 0;
    held = 0; done_req = 0;
    foreach (slot_cnt[i]) begin slot_cnt[i] = 0; slot_orig[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      if (done_req) aw_v = 0;
      done_req = 0;
      if (!aw_v) begin
        aw_v  = ($urandom_range(0, 99) < 60);
        aw_id = Ids[$urandom_range(0, 5)];
      end
      int_aw_rdy = ($urandom_range(0, 99) < 60);
      // a random outstanding write completes
      pick = $urandom_range(0, 3);
      b_hs = (slot_cnt[pick] > 0) && ($urandom_range(0, 99) < 30);
      int_b_id = 2'(pick);
      #1;
      if (b_hs) chk(b_id_o == slot_orig[pick], "B gets original ID back");
      if (aw_v) begin
        chk(int_aw_v == can_take(aw_id), "stall exactly when no slot can take the ID");
        chk(aw_rdy_o == (int_aw_v && int_aw_rdy), "ready follows the compacted side");
        if (!int_aw_v) stalls++;
        if (int_aw_v) begin
          s = slot_of(aw_id);
          if (s >= 0) chk(int_aw_id == 2'(s), "ID keeps its slot");
          else        chk(slot_cnt[int_aw_id] == 0, "new ID gets a free slot");
          if (held) chk(int_aw_id == held_id, "compacted ID stable while waiting");
        end
      end
      @(posedge clk);
      if (b_hs) slot_cnt[pick]--;
      if (aw_v && int_aw_v && int_aw_rdy) begin
        slot_cnt[int_aw_id]++;
        slot_orig[int_aw_id] = aw_id;
        done_req = 1;
        held = 0;
      end else if (aw_v && int_aw_v) begin
        held = 1; held_id = int_aw_id;
      end else begin
        held = 0;
      end
    end
    chk(stalls > 0, "stall case reached");
    // read direction: two IDs, map and restore
    @(negedge clk); aw_v = 0; int_aw_rdy = 0; b_hs = 0;
    ar_v = 1; ar_id = 8'h55; int_ar_rdy = 1; #1;
    chk(int_ar_v && ar_rdy_o && int_ar_id == 2'd0, "first read ID takes slot 0");
    @(negedge clk); ar_id = 8'haa; #1;
    chk(int_ar_v && int_ar_id == 2'd1, "second read ID takes slot 1");
    @(negedge clk); ar_id = 8'h55; #1;
    chk(int_ar_id == 2'd0, "read ID keeps its slot");
    @(negedge clk); ar_v = 0; int_r_id = 2'd1; r_hs = 1; #1;
    chk(r_id_o == 8'haa, "R gets original ID back");
    @(negedge clk); r_hs = 0; ar_v = 1; ar_id = 8'h11; #1;
    chk(int_ar_id == 2'd1, "released slot is reused");
    @(negedge clk); ar_v = 0;
    $display("stalled cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
