// tb_tmu_prescaler_sweep: detection latency against prescaler step, with the
// table sized for 128 outstanding transactions (4 IDs x 32 per ID). Eight
// write guards, Full-Counter and Tiny-Counter at prescaler steps 1, 8, 32 and
// 128, see the same stimulus: the table is first filled with 127 accepted
// writes whose responses are held back, and then one more write whose data
// never comes (the manager never asserts w_valid, a total stall of the data
// path). Budgets are 10, 20, 10, 0 (+1 per beat), 20, 10 cycles and the
// bursts have 1 beat, so the stalled phase has a 20-cycle budget plus the
// beats queued ahead of it, and the Tiny-Counter budget is 71 cycles plus
// the same queued beats. For each guard the testbench checks the error code
// and that the detection delay is no shorter than the budget and no longer
// than the budget plus two prescaler steps (the rounding to whole ticks and
// the spare tick), and that every guard got all 128 writes into its table.
// The measured delays are printed; they grow with the step while the
// counters shrink from 10 to 3 bits.
module tb_tmu_prescaler_sweep;
  import tmu_pkg::*;
  localparam int NI = 4, TPI = 32, NT = NI * TPI, AW = 32;
  localparam int NG = 8;
  localparam int Steps[4] = '{1, 8, 32, 128};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;

  logic [5:0][15:0] cfg;
  logic aw_valid = 0, w_valid = 0, w_last = 0;
  logic [1:0] aw_id = '0;
  logic [NG-1:0] aw_gate, w_gate, ab_v, sev, fault, drained, rreq, done, ack;
  err_info_t err[NG];
  int fault_cyc[NG], occupancy[NG];

  for (genvar g = 0; g < NG; g++) begin : gen_dut
    localparam bit Fc = (g % 2 == 0);
    localparam int Step = Steps[g / 2];
    localparam int TW = 10 - $clog2(Step);
    logic [(Fc ? 6 : 1)-1:0][TW-1:0] lat;
    logic [AW-1:0] err_addr;
    logic [1:0] ab_id;
    tmu_write_guard #(.FullCounter(Fc), .MaxUniqIds(NI), .TxnPerUniqId(TPI),
                      .PrescalerStep(Step), .CntWidth(10), .AddrWidth(AW)) dut (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(1'b1), .reset_en_i(1'b1),
      .cfg_budget_i(cfg), .cfg_beat_i(16'd1),
      .aw_valid_i(aw_valid), .aw_id_i(aw_id), .aw_addr_i(32'h4000_0000), .aw_len_i(8'd0),
      .aw_ready_i(1'b1), .aw_gate_o(aw_gate[g]),
      .w_valid_i(w_valid), .w_last_i(w_last), .w_ready_i(1'b1), .w_gate_o(w_gate[g]),
      .b_valid_i(1'b0), .b_id_i(2'd0), .b_ready_i(1'b0),
      .abort_b_valid_o(ab_v[g]), .abort_b_id_o(ab_id), .abort_b_ready_i(1'b1),
      .severed_o(sev[g]), .fault_o(fault[g]), .pass_i(!sev[g] && !fault[g]),
      .drained_o(drained[g]), .peer_drained_i(1'b1),
      .reset_req_o(rreq[g]), .reset_ack_i(ack[g]),
      .err_o(err[g]), .err_addr_o(err_addr), .lat_o(lat), .done_o(done[g]));
    assign ack[g] = rreq[g];
    always @(posedge clk) begin
      // Only count faults once reset is released: before the first clock
      // edge the registers still hold their power-up values.
      if (rst_n && fault[g] && fault_cyc[g] < 0) fault_cyc[g] = cyc;
      if ($countones(dut.i_ott.slot_valid_o) > occupancy[g])
        occupancy[g] = $countones(dut.i_ott.slot_valid_o);
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_stall, bud_fc, bud_tc, lat_c;
    err_info_t e1[NG];
    cfg = {16'd10, 16'd20, 16'd0, 16'd10, 16'd20, 16'd10};
    for (int g = 0; g < NG; g++) begin fault_cyc[g] = -1; occupancy[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 127 one-beat writes, one per cycle, each with its beat at once; their
    // B responses never come, but their budgets (B0 = 20 cycles) are large
    // enough only for the last few, so raise B0 for the fill
    cfg[4] = 16'd1000;
    for (int i = 0; i < NT - 1; i++) begin
      aw_valid = 1; aw_id = 2'(i % NI);
      @(negedge clk);
      aw_valid = 0;
      w_valid = 1; w_last = 1;
      @(negedge clk);
      w_valid = 0; w_last = 0;
    end
    cfg[4] = 16'd20;
    // the stalled write: accepted at once, its data never comes
    aw_valid = 1; aw_id = 2'd3;
    t_stall = cyc;
    @(negedge clk);
    aw_valid = 0;
    begin
      bit all_seen;
      all_seen = 0;
      while (!all_seen && cyc < t_stall + 2000) begin
        @(negedge clk);
        all_seen = 1;
        for (int g = 0; g < NG; g++) if (fault_cyc[g] < 0) all_seen = 0;
      end
    end
    repeat (2) @(negedge clk);
    // no beats are queued ahead of the stalled write (all earlier data is in)
    bud_fc = 20;
    bud_tc = 10 + 20 + 10 + 1 + 20 + 10;
    $display("step  Fc delay  Tc delay   (budgets %0d / %0d cycles)", bud_fc, bud_tc);
    for (int s = 0; s < 4; s++) begin
      $display("%4d  %8d  %8d", Steps[s], fault_cyc[2 * s] - t_stall, fault_cyc[2 * s + 1] - t_stall);
      for (int v = 0; v < 2; v++) begin
        int g;
        g = 2 * s + v;
        lat_c = fault_cyc[g] - t_stall;
        chk(fault_cyc[g] >= 0, $sformatf("guard %0d detected the stall", g));
        chk(occupancy[g] == NT, $sformatf("guard %0d held %0d writes", g, occupancy[g]));
        chk(lat_c >= (v == 0 ? bud_fc : bud_tc) &&
            lat_c <= (v == 0 ? bud_fc : bud_tc) + 2 * Steps[s] + 2,
            $sformatf("step %0d %s delay %0d", Steps[s], v == 0 ? "Fc" : "Tc", lat_c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
