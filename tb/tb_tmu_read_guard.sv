// tb_tmu_read_guard: drives a Full-Counter and a Tiny-Counter read guard
// with the same AR/R stimulus (the testbench plays both manager and
// subordinate) and injects one fault per scenario, at each of the four read
// phases plus two protocol violations. Budgets: 10, 20, 10, 0 (+1 per beat)
// cycles; bursts of 8 beats, so the Tiny-Counter budget is 48 cycles.
// For every scenario it checks the error code and phase, the detection cycle
// against the budget, the abort sequence (the outstanding beats of the read
// are returned with SLVERR and the last flag only on the final one) and the
// reset handshake; and, for a fault-free read, completion and the latency log.
module tb_tmu_read_guard;
  import tmu_pkg::*;
  localparam int NI = 4, TPI = 4, AW = 32;
  localparam int Bud[4] = '{10, 20, 10, 0};
  localparam int Len = 7;
  localparam int TcBudget = 10 + 20 + 10 + (Len + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [3:0][15:0] cfg;
  logic ar_valid, ar_ready, r_valid, r_last, r_ready;
  logic [1:0] ar_id, r_id;
  logic [AW-1:0] ar_addr;

  // two guards: index 0 = Full-Counter, 1 = Tiny-Counter
  logic [1:0] ar_gate, ab_v, ab_last, sev, fault, drained, rreq, done;
  logic [1:0][1:0] ab_id;
  logic [1:0] pass, ack;
  err_info_t err[2];
  logic [AW-1:0] err_addr[2];
  logic [3:0][9:0] lat_fc;
  logic [0:0][9:0] lat_tc;
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 2; g++) begin : gen_dut
    logic [(g == 0 ? 4 : 1)-1:0][9:0] lat;
    tmu_read_guard #(.FullCounter(g == 0), .MaxUniqIds(NI), .TxnPerUniqId(TPI),
                     .PrescalerStep(1), .CntWidth(10), .AddrWidth(AW)) dut (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(1'b1), .reset_en_i(1'b1),
      .cfg_budget_i(cfg), .cfg_beat_i(16'd1),
      .ar_valid_i(ar_valid), .ar_id_i(ar_id), .ar_addr_i(ar_addr), .ar_len_i(8'(Len)),
      .ar_ready_i(ar_ready), .ar_gate_o(ar_gate[g]),
      .r_valid_i(r_valid), .r_id_i(r_id), .r_last_i(r_last), .r_ready_i(r_ready),
      .abort_r_valid_o(ab_v[g]), .abort_r_id_o(ab_id[g]), .abort_r_last_o(ab_last[g]),
      .abort_r_ready_i(1'b1),
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

  int fault_cyc[2], n_abort[2], n_reset[2], n_last[2];
  logic last_on_final[2];
  err_info_t err1[2];
  logic [AW-1:0] err_addr1[2];
  for (genvar g = 0; g < 2; g++) begin : gen_mon
    always @(posedge clk) begin
      if (fault[g] && fault_cyc[g] < 0) fault_cyc[g] = cyc;
      if (fault_cyc[g] == cyc - 1) begin err1[g] = err[g]; err_addr1[g] = err_addr[g]; end
      if (ab_v[g]) begin
        n_abort[g]++;
        if (ab_last[g]) n_last[g]++;
        last_on_final[g] = ab_last[g];
      end
      if (rreq[g] && ack[g]) n_reset[g]++;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic idle();
    ar_valid = 0; ar_ready = 0; r_valid = 0; r_last = 0; r_ready = 0;
  endtask

  task automatic hold();
    int n = 0;
    while (!(fault_cyc[0] >= 0 && fault_cyc[1] >= 0) && n < TcBudget + 20) begin
      @(negedge clk); n++;
    end
  endtask

  // Run one read. fault: 0 none, 1 AR never ready, 2 no R valid, 3 R never
  // ready, 4 burst stalls after the first beat, 5 R for an unused ID,
  // 6 r_last on beat 4
  task automatic run(input int fault, output int t_phase, output int t_ar);
    int beat;
    t_phase = -1;
    foreach (fault_cyc[g]) begin
      fault_cyc[g] = -1; n_abort[g] = 0; n_reset[g] = 0; n_last[g] = 0;
    end
    @(negedge clk);
    t_ar = cyc;
    if (fault == 5) begin
      r_valid = 1; r_id = 2'd3; r_ready = 1; r_last = 1; t_phase = cyc;
      @(negedge clk); idle();
      return;
    end
    ar_valid = 1; ar_id = 2'd2; ar_addr = 32'h2000_0080; ar_ready = 0;
    t_phase = cyc;
    repeat (2) @(negedge clk);
    if (fault == 1) begin hold(); idle(); return; end
    ar_ready = 1;
    @(negedge clk);
    ar_valid = 0; ar_ready = 0;
    if (fault == 2) begin t_phase = cyc; hold(); idle(); return; end
    @(negedge clk);
    r_valid = 1; r_id = 2'd2; beat = 0; r_last = (Len == 0);
    if (fault == 3) begin t_phase = cyc; hold(); idle(); return; end
    while (beat <= Len) begin
      r_ready = 1;
      if (fault == 6) r_last = (beat == 3);
      if (fault == 6 && beat == 3) begin
        t_phase = cyc;
        @(negedge clk); idle();
        repeat (10) @(negedge clk);
        return;
      end
      if (beat == 0 && fault == 4) t_phase = cyc;
      @(negedge clk);
      beat++;
      r_last = (beat == Len);
      if (fault == 4) begin r_ready = 0; hold(); idle(); return; end
    end
    idle();
    repeat (5) @(negedge clk);
  endtask

  task automatic wait_recovered();
    int n = 0;
    repeat (40) @(negedge clk);
    while ((sev != 2'b00) && n < 200) begin @(negedge clk); n++; end
    chk(sev == 2'b00, "both guards back to monitoring");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, ta;
    int ph[7]  = '{0, 0, 1, 2, 3, 0, 0};
    int bud[7] = '{0, 10, 20, 10, Len + 1, 0, 0};
    int beats_left[7] = '{0, 0, Len + 1, Len + 1, Len, 0, 0};
    for (int p = 0; p < 4; p++) cfg[p] = 16'(Bud[p]);
    idle(); ar_id = '0; ar_addr = '0; r_id = '0;
    foreach (fault_cyc[g]) fault_cyc[g] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    run(0, t0, ta);
    chk(fault_cyc[0] < 0 && fault_cyc[1] < 0, "no fault on a good read");
    chk(gen_dut[0].dut.i_ott.slot_valid_o == '0, "table empty after completion");
    chk(lat_fc[0] == 10'd3, $sformatf("AR phase log %0d", lat_fc[0]));
    chk(lat_fc[3] == 10'(Len), $sformatf("burst phase log %0d", lat_fc[3]));
    chk(lat_tc[0] > 10'd10 && lat_tc[0] < 10'd20, $sformatf("Tc latency log %0d", lat_tc[0]));

    for (int f = 1; f <= 6; f++) begin
      run(f, t0, ta);
      wait_recovered();
      for (int g = 0; g < 2; g++)
        chk(fault_cyc[g] >= 0, $sformatf("scenario %0d guard %0d detected", f, g));
      if (f <= 4) begin
        chk(err1[0].code == ERR_TIMEOUT && err1[0].phase == 3'(ph[f]),
            $sformatf("scenario %0d Fc code %0d phase %0d", f, err1[0].code, err1[0].phase));
        chk(fault_cyc[0] - t0 >= bud[f] && fault_cyc[0] - t0 <= bud[f] + 1,
            $sformatf("scenario %0d Fc detection after %0d cycles, budget %0d", f, fault_cyc[0] - t0, bud[f]));
        chk(err1[1].code == ERR_TIMEOUT, $sformatf("scenario %0d Tc timeout", f));
        chk(fault_cyc[1] - ta >= TcBudget && fault_cyc[1] - ta <= TcBudget + 1,
            $sformatf("scenario %0d Tc detection after %0d cycles", f, fault_cyc[1] - ta));
        chk(err_addr1[0] == 32'h2000_0080, "error address logged");
        for (int g = 0; g < 2; g++) begin
          chk(n_abort[g] == beats_left[f], $sformatf("scenario %0d guard %0d abort beats %0d", f, g, n_abort[g]));
          if (beats_left[f] > 0)
            chk(n_last[g] == 1 && last_on_final[g], $sformatf("scenario %0d guard %0d abort last flag", f, g));
        end
      end else if (f == 5) begin
        chk(err1[0].code == ERR_UNREQ && err1[1].code == ERR_UNREQ, "unrequested R flagged");
        chk(fault_cyc[0] == t0 && fault_cyc[1] == t0, "unrequested R flagged in the same cycle");
      end else begin
        chk(err1[0].code == ERR_LAST && err1[1].code == ERR_LAST, "r_last mismatch flagged");
        chk(fault_cyc[0] == t0, "r_last mismatch flagged in the same cycle");
        for (int g = 0; g < 2; g++)
          chk(n_last[g] <= 1 && (n_abort[g] == 0 || last_on_final[g]), "abort after r_last mismatch");
      end
      for (int g = 0; g < 2; g++)
        chk(n_reset[g] >= 1, $sformatf("scenario %0d reset handshake", f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
