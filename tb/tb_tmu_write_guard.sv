// tb_tmu_write_guard: drives a Full-Counter and a Tiny-Counter write guard
// (each also with a prescaler of 32) with the same AW/W/B stimulus (the testbench plays both manager and
// subordinate) and injects one fault per scenario, at each of the six write
// phases plus two protocol violations. Budgets: 10, 20, 10, 0 (+1 per beat),
// 20, 10 cycles; bursts of 250 beats (a 2000-byte Ethernet frame on a 64-bit
// bus), so the Tiny-Counter budget is 320 cycles.
// For every scenario it checks the error code and phase, the detection
// cycle against the phase start plus the budget worked out here (Full-
// Counter) or against aw_valid plus the total (Tiny-Counter), the SLVERR
// abort response of the accepted write, and the reset handshake; and, for a
// fault-free write, completion without fault and the per-phase latency log.
module tb_tmu_write_guard;
  import tmu_pkg::*;
  localparam int NI = 4, TPI = 4, AW = 32;
  localparam int Bud[6] = '{10, 20, 10, 0, 20, 10};
  localparam int Len = 249;  // the 250-beat Ethernet frame
  localparam int TcBudget = 10 + 20 + 10 + (Len + 1) + 20 + 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [5:0][15:0] cfg;
  logic aw_valid, aw_ready, w_valid, w_last, w_ready, b_valid, b_ready;
  logic [1:0] aw_id, b_id;
  logic [AW-1:0] aw_addr;

  // two guards: index 0 = Full-Counter, 1 = Tiny-Counter
  localparam int NG = 4;
  logic [NG-1:0] aw_gate, w_gate, ab_v, sev, fault, drained, rreq, done;
  logic [NG-1:0][1:0] ab_id;
  logic [NG-1:0] pass, ack;
  err_info_t err[NG];
  logic [AW-1:0] err_addr[NG];
  logic [5:0][9:0] lat_fc;
  logic [0:0][9:0] lat_tc;
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NG; g++) begin : gen_dut
    localparam bit Fc = (g % 2 == 0);
    localparam int Step = (g >= 2) ? 32 : 1;
    logic [(Fc ? 6 : 1)-1:0][(g >= 2 ? 5 : 10)-1:0] lat;
    tmu_write_guard #(.FullCounter(Fc), .MaxUniqIds(NI), .TxnPerUniqId(TPI),
                      .PrescalerStep(Step), .CntWidth(10), .AddrWidth(AW)) dut (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(1'b1), .reset_en_i(1'b1),
      .cfg_budget_i(cfg), .cfg_beat_i(16'd1),
      .aw_valid_i(aw_valid), .aw_id_i(aw_id), .aw_addr_i(aw_addr), .aw_len_i(8'(Len)),
      .aw_ready_i(aw_ready), .aw_gate_o(aw_gate[g]),
      .w_valid_i(w_valid), .w_last_i(w_last), .w_ready_i(w_ready), .w_gate_o(w_gate[g]),
      .b_valid_i(b_valid), .b_id_i(b_id), .b_ready_i(b_ready),
      .abort_b_valid_o(ab_v[g]), .abort_b_id_o(ab_id[g]), .abort_b_ready_i(1'b1),
      .severed_o(sev[g]), .fault_o(fault[g]), .pass_i(pass[g]),
      .drained_o(drained[g]), .peer_drained_i(1'b1),
      .reset_req_o(rreq[g]), .reset_ack_i(ack[g]),
      .err_o(err[g]), .err_addr_o(err_addr[g]), .lat_o(lat), .done_o(done[g]));
    assign pass[g] = !sev[g] && !fault[g];
    // behavioural reset unit: acknowledge 3 cycles after the request
    logic [2:0] req_sh;
    always_ff @(posedge clk) req_sh <= {req_sh[1:0], rreq[g]};
    assign ack[g] = rreq[g] && req_sh[2];
  end
  assign lat_fc = gen_dut[0].lat;
  assign lat_tc = gen_dut[1].lat;

  // per-guard observation of faults, abort responses and reset requests
  int fault_cyc[NG], n_abort[NG], n_reset[NG];
  err_info_t err1[NG];
  logic [AW-1:0] err_addr1[NG];
  logic [1:0] abort_id_seen[NG];
  for (genvar g = 0; g < NG; g++) begin : gen_mon
    always @(posedge clk) begin
      if (fault[g] && fault_cyc[g] < 0) fault_cyc[g] = cyc;
      // the log as it stood one cycle after the first fault
      if (fault_cyc[g] == cyc - 1) begin err1[g] = err[g]; err_addr1[g] = err_addr[g]; end
      if (ab_v[g]) begin n_abort[g]++; abort_id_seen[g] = ab_id[g]; end
      if (rreq[g] && ack[g]) n_reset[g]++;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic idle();
    aw_valid = 0; w_valid = 0; w_last = 0; b_valid = 0; aw_ready = 0; w_ready = 0; b_ready = 0;
  endtask

  // Run one write. fault selects the stall or violation:
  //  0 none, 1 AW never ready, 2 no W valid, 3 W never ready, 4 burst stalls
  //  after the first beat, 5 no B, 6 B never ready, 7 B for an unused ID,
  //  8 w_last on beat 4
  task automatic run(input int fault, output int t_phase);
    int beat;
    t_phase = -1;
    foreach (fault_cyc[g]) begin fault_cyc[g] = -1; n_abort[g] = 0; n_reset[g] = 0; end
    @(negedge clk);
    if (fault == 7) begin
      b_valid = 1; b_id = 2'd3; b_ready = 1; t_phase = cyc;
      @(negedge clk); idle();
      return;
    end
    aw_valid = 1; aw_id = 2'd1; aw_addr = 32'h1000_0040;
    aw_ready = (fault != 1) ? 1'b0 : 1'b0;
    if (fault == 1) t_phase = cyc;
    if (fault == 0) t_phase = cyc;
    // AW handshake after 2 cycles
    repeat (2) @(negedge clk);
    if (fault == 1) begin
      hold();
      idle(); return;
    end
    aw_ready = 1;
    @(negedge clk);
    aw_valid = 0; aw_ready = 0;
    if (fault == 2) begin
      t_phase = cyc;
      hold();
      idle(); return;
    end
    // W beats
    beat = 0;
    w_valid = 1; w_last = (Len == 0);
    if (fault == 3) begin
      t_phase = cyc;
      hold();
      idle(); return;
    end
    while (beat <= Len) begin
      w_ready = 1;
      if (fault == 8) w_last = (beat == 3);
      if (fault == 8 && beat == 3) begin
        t_phase = cyc;
        @(negedge clk); idle();
        repeat (10) @(negedge clk);
        return;
      end
      if (beat == 0 && fault == 4) t_phase = cyc;
      @(negedge clk);
      beat++;
      w_last = (beat == Len);
      if (fault == 4) begin
        w_ready = 0;
        hold();
        idle(); return;
      end
    end
    w_valid = 0; w_ready = 0; w_last = 0;
    if (fault == 5) begin
      t_phase = cyc - 1;
      hold();
      idle(); return;
    end
    @(negedge clk);
    b_valid = 1; b_id = 2'd1;
    if (fault == 6) begin
      t_phase = cyc;
      hold();
      idle(); return;
    end
    b_ready = 1;
    @(negedge clk);
    idle();
    repeat (5) @(negedge clk);
  endtask

  // keep the stall until both guards have flagged it (the reset unit then
  // clears the stalled party) or the Tiny-Counter budget is well past
  task automatic hold();
    int n = 0;
    while (!(fault_cyc[0] >= 0 && fault_cyc[1] >= 0 && fault_cyc[2] >= 0 && fault_cyc[3] >= 0) &&
           n < TcBudget + 80) begin
      @(negedge clk); n++;
    end
  endtask

  // a guard that recovered while the stalled AW was still offered has taken
  // it again; let that copy time out too before the next scenario
  task automatic wait_recovered();
    int n = 0;
    repeat (TcBudget + 120) @(negedge clk);
    while ((sev != '0) && n < 400) begin @(negedge clk); n++; end
    chk(sev == '0, "all guards back to monitoring");
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    // expected Fc phase and latency per fault scenario 1..6
    int ph[9]  = '{0, 0, 1, 2, 3, 4, 5, 4, 3};
    int bud[9] = '{0, 10, 20, 10, Len + 1, 20, 10, 0, 0};
    for (int p = 0; p < 6; p++) cfg[p] = 16'(Bud[p]);
    idle(); aw_id = '0; aw_addr = '0; b_id = '0;
    foreach (fault_cyc[g]) fault_cyc[g] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // fault-free write
    run(0, t0);
    chk(fault_cyc[0] < 0 && fault_cyc[1] < 0, "no fault on a good write");
    chk(gen_dut[0].dut.i_ott.slot_valid_o == '0, "table empty after completion");
    chk(lat_fc[0] == 10'd3, $sformatf("AW phase log %0d", lat_fc[0]));
    chk(lat_fc[3] == 10'(Len), $sformatf("burst phase log %0d", lat_fc[3]));
    chk(lat_tc[0] > 10'(Len) && lat_tc[0] < 10'(Len + 20), $sformatf("Tc latency log %0d", lat_tc[0]));

    for (int f = 1; f <= 8; f++) begin
      run(f, t0);
      wait_recovered();
      for (int g = 0; g < NG; g++) begin
        chk(fault_cyc[g] >= 0, $sformatf("scenario %0d guard %0d detected", f, g));
      end
      if (f <= 6) begin
        chk(err1[0].code == ERR_TIMEOUT && err1[0].phase == 3'(ph[f]),
            $sformatf("scenario %0d Fc code %0d phase %0d", f, err1[0].code, err1[0].phase));
        chk(fault_cyc[0] - t0 >= bud[f] && fault_cyc[0] - t0 <= bud[f] + 1,
            $sformatf("scenario %0d Fc detection after %0d cycles, budget %0d", f, fault_cyc[0] - t0, bud[f]));
        chk(err1[1].code == ERR_TIMEOUT, $sformatf("scenario %0d Tc timeout", f));
        chk(fault_cyc[1] - aw_start(f, t0) >= TcBudget && fault_cyc[1] - aw_start(f, t0) <= TcBudget + 1,
            $sformatf("scenario %0d Tc detection after %0d cycles", f, fault_cyc[1] - aw_start(f, t0)));
        chk(err_addr1[0] == 32'h1000_0040, "error address logged");
        // prescaled by 32: the budget is rounded up to whole ticks of 32 cycles
        // and the phase start is only known to the tick
        chk(err1[2].code == ERR_TIMEOUT && err1[2].phase == 3'(ph[f]) &&
            fault_cyc[2] - t0 >= bud[f] && fault_cyc[2] - t0 <= bud[f] + 64,
            $sformatf("scenario %0d Fc+Pre detection after %0d cycles, budget %0d", f, fault_cyc[2] - t0, bud[f]));
        chk(err1[3].code == ERR_TIMEOUT &&
            fault_cyc[3] - aw_start(f, t0) >= TcBudget && fault_cyc[3] - aw_start(f, t0) <= TcBudget + 64,
            $sformatf("scenario %0d Tc+Pre detection after %0d cycles", f, fault_cyc[3] - aw_start(f, t0)));
        if (f == 4) $display("burst stall, budget %0d: Fc %0d, Tc %0d, Fc+Pre %0d, Tc+Pre %0d cycles",
                             bud[f], fault_cyc[0] - t0, fault_cyc[1] - aw_start(f, t0),
                             fault_cyc[2] - t0, fault_cyc[3] - aw_start(f, t0));
      end else if (f == 7) begin
        chk(err1[0].code == ERR_UNREQ && err1[1].code == ERR_UNREQ && err1[2].code == ERR_UNREQ,
            "unrequested B flagged");
        chk(fault_cyc[0] == t0 && fault_cyc[1] == t0, "unrequested B flagged in the same cycle");
      end else begin
        chk(err1[0].code == ERR_LAST && err1[1].code == ERR_LAST, "w_last mismatch flagged");
        chk(fault_cyc[0] == t0, "w_last mismatch flagged in the same cycle");
      end
      // an accepted write gets one SLVERR B with its ID; a write never accepted gets none
      for (int g = 0; g < NG; g++) begin
        if (f == 1 || f == 7) chk(n_abort[g] == 0, $sformatf("scenario %0d no abort response", f));
        else chk(n_abort[g] == 1 && abort_id_seen[g] == 2'd1, $sformatf("scenario %0d guard %0d abort B count %0d", f, g, n_abort[g]));
        chk(n_reset[g] >= 1, $sformatf("scenario %0d reset handshake", f));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle of aw_valid in scenario f, relative to the recorded phase start
  function automatic int aw_start(input int f, input int t0);
    case (f)
      1: return t0;
      2: return t0 - 3;
      3: return t0 - 3;
      4: return t0 - 3;
      5: return t0 - 3 - (Len + 1);
      6: return t0 - 3 - (Len + 1) - 1 - 1;
      default: return t0;
    endcase
  endfunction
endmodule
