// tb_tmu_ethernet: fault-injection study on one large write, run through four
// complete TMUs side by side: a Full-Counter (default parameters), a
// Tiny-Counter (FullCounter = 0), and the same two with a prescaler step of
// 32 (lanes 2 and 3). All keep their reset-value budgets (10,
// 20, 10, 0 + 1 per beat, 20, 10 cycles; 320 cycles in all for 250 beats).
// Each TMU has its own lane: a manager that issues one 250-beat write on the
// 64-bit bus (a 2000-byte Ethernet frame), a subordinate that runs at full
// speed, and a reset unit that acknowledges after 3 cycles. The write first
// runs fault-free (no fault may be flagged and the B must be OKAY). It then
// runs once per injection stage, with one stall:
//   1 AWVLD_AWRDY  subordinate never raises aw_ready
//   2 AWRDY_WVLD   manager never sends write data
//   3 WVLD_WRDY    subordinate never raises w_ready
//   4 WFIRST_WLAST subordinate stops w_ready after the first beat
//   5 WLAST_BVLD   subordinate never sends B
//   6 BVLD_BRDY    manager never raises b_ready
// For each stage it measures the cycles from the start of the stalled phase
// to the interrupt (Full-Counter) and from aw_valid to the interrupt (Tiny-
// Counter), and checks them against the phase budget and against the
// 320-cycle total; both may exceed them by at most 2 cycles, because the
// recorded start is the cycle the manager sets valid up (one cycle before the
// TMU sees it) and because the interrupt output is registered. Measured:
// Full-Counter 12, 22, 12, 252, 22, 12 and Tiny-Counter 322 for every stage.
// The prescaled lanes count in 32-cycle ticks with one spare tick, so they
// may be late by up to 2 steps plus 2 cycles; measured Full-Counter 39, 65,
// 42, 268, 52, 42 and Tiny-Counter 327 to 354.
// The interrupt status is cleared through the register
// port after every run. It also checks that the write is answered with SLVERR
// when it had been accepted, and that the reset handshake happens.
module tb_tmu_ethernet;
  import tmu_pkg::*;
  localparam int Len = 249;
  localparam int Total = 320;
  localparam int PhaseBudget[7] = '{0, 10, 20, 10, Len + 1, 20, 10};
  localparam int NL = 4;                            // lanes
  localparam int Step[NL] = '{1, 1, 32, 32};        // prescaler step per lane

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;

  logic start = 1'b0;
  logic clr_irq = 1'b0;   // write 1s to the interrupt status register
  int   stage = 0;

  // per lane (even = Full-Counter, odd = Tiny-Counter; lanes 2 and 3 with a
  // prescaler step of 32): results of the last run
  int  t_start[NL][7];   // cycle each phase started (index = stage)
  int  t_irq[NL], n_rst[NL];
  bit  done[NL], got_b[NL];
  logic [1:0] b_resp[NL];

  for (genvar g = 0; g < NL; g++) begin : gen_lane
    // manager
    logic aw_valid = 0, w_valid = 0, w_last = 0, b_ready = 0;
    logic [63:0] w_data = '0;
    logic aw_ready, w_ready, b_valid;
    logic [7:0] b_id;
    logic [1:0] resp;
    // subordinate
    logic s_aw_valid, s_w_valid, s_w_last, s_b_ready;
    logic s_aw_ready, s_w_ready, s_b_valid = 0;
    logic [1:0] s_aw_id, s_b_id = '0;
    logic [1:0] s_ar_id;
    // unused read side and registers
    logic ar_ready, r_valid, r_last, s_ar_valid, s_r_ready;
    logic [7:0] r_id;
    logic [63:0] r_data;
    logic [1:0] r_resp;
    logic [47:0] s_aw_addr, s_ar_addr;
    logic [7:0] s_aw_len, s_ar_len;
    logic [2:0] s_aw_size, s_ar_size;
    logic [1:0] s_aw_burst, s_ar_burst;
    logic [63:0] s_w_data;
    logic [7:0] s_w_strb;
    logic [31:0] rg_rdata;
    logic rg_err, irq, rst_req, rst_ack;

    if (g == 0) begin : gen_fc
      tmu_top dut (
        .clk_i(clk), .rst_ni(rst_n),
        .mst_aw_valid_i(aw_valid), .mst_aw_ready_o(aw_ready), .mst_aw_id_i(8'h42),
        .mst_aw_addr_i(48'h0000_3000_0000), .mst_aw_len_i(8'(Len)), .mst_aw_size_i(3'd3), .mst_aw_burst_i(2'd1),
        .mst_w_valid_i(w_valid), .mst_w_ready_o(w_ready), .mst_w_data_i(w_data), .mst_w_strb_i('1), .mst_w_last_i(w_last),
        .mst_b_valid_o(b_valid), .mst_b_ready_i(b_ready), .mst_b_id_o(b_id), .mst_b_resp_o(resp),
        .mst_ar_valid_i(1'b0), .mst_ar_ready_o(ar_ready), .mst_ar_id_i('0), .mst_ar_addr_i('0), .mst_ar_len_i('0),
        .mst_ar_size_i('0), .mst_ar_burst_i('0),
        .mst_r_valid_o(r_valid), .mst_r_ready_i(1'b1), .mst_r_id_o(r_id), .mst_r_data_o(r_data),
        .mst_r_resp_o(r_resp), .mst_r_last_o(r_last),
        .slv_aw_valid_o(s_aw_valid), .slv_aw_ready_i(s_aw_ready), .slv_aw_id_o(s_aw_id), .slv_aw_addr_o(s_aw_addr),
        .slv_aw_len_o(s_aw_len), .slv_aw_size_o(s_aw_size), .slv_aw_burst_o(s_aw_burst),
        .slv_w_valid_o(s_w_valid), .slv_w_ready_i(s_w_ready), .slv_w_data_o(s_w_data), .slv_w_strb_o(s_w_strb),
        .slv_w_last_o(s_w_last),
        .slv_b_valid_i(s_b_valid), .slv_b_ready_o(s_b_ready), .slv_b_id_i(s_b_id), .slv_b_resp_i(RespOkay),
        .slv_ar_valid_o(s_ar_valid), .slv_ar_ready_i(1'b1), .slv_ar_id_o(s_ar_id), .slv_ar_addr_o(s_ar_addr),
        .slv_ar_len_o(s_ar_len), .slv_ar_size_o(s_ar_size), .slv_ar_burst_o(s_ar_burst),
        .slv_r_valid_i(1'b0), .slv_r_ready_o(s_r_ready), .slv_r_id_i('0), .slv_r_data_i('0),
        .slv_r_resp_i(RespOkay), .slv_r_last_i(1'b0),
        .reg_valid_i(clr_irq), .reg_write_i(1'b1), .reg_addr_i(RegIrq), .reg_wdata_i(32'h3),
        .reg_rdata_o(rg_rdata), .reg_error_o(rg_err),
        .irq_o(irq), .reset_req_o(rst_req), .reset_ack_i(rst_ack));
    end else begin : gen_tc
      tmu_top #(.FullCounter(g == 2), .PrescalerStep(Step[g])) dut (
        .clk_i(clk), .rst_ni(rst_n),
        .mst_aw_valid_i(aw_valid), .mst_aw_ready_o(aw_ready), .mst_aw_id_i(8'h42),
        .mst_aw_addr_i(48'h0000_3000_0000), .mst_aw_len_i(8'(Len)), .mst_aw_size_i(3'd3), .mst_aw_burst_i(2'd1),
        .mst_w_valid_i(w_valid), .mst_w_ready_o(w_ready), .mst_w_data_i(w_data), .mst_w_strb_i('1), .mst_w_last_i(w_last),
        .mst_b_valid_o(b_valid), .mst_b_ready_i(b_ready), .mst_b_id_o(b_id), .mst_b_resp_o(resp),
        .mst_ar_valid_i(1'b0), .mst_ar_ready_o(ar_ready), .mst_ar_id_i('0), .mst_ar_addr_i('0), .mst_ar_len_i('0),
        .mst_ar_size_i('0), .mst_ar_burst_i('0),
        .mst_r_valid_o(r_valid), .mst_r_ready_i(1'b1), .mst_r_id_o(r_id), .mst_r_data_o(r_data),
        .mst_r_resp_o(r_resp), .mst_r_last_o(r_last),
        .slv_aw_valid_o(s_aw_valid), .slv_aw_ready_i(s_aw_ready), .slv_aw_id_o(s_aw_id), .slv_aw_addr_o(s_aw_addr),
        .slv_aw_len_o(s_aw_len), .slv_aw_size_o(s_aw_size), .slv_aw_burst_o(s_aw_burst),
        .slv_w_valid_o(s_w_valid), .slv_w_ready_i(s_w_ready), .slv_w_data_o(s_w_data), .slv_w_strb_o(s_w_strb),
        .slv_w_last_o(s_w_last),
        .slv_b_valid_i(s_b_valid), .slv_b_ready_o(s_b_ready), .slv_b_id_i(s_b_id), .slv_b_resp_i(RespOkay),
        .slv_ar_valid_o(s_ar_valid), .slv_ar_ready_i(1'b1), .slv_ar_id_o(s_ar_id), .slv_ar_addr_o(s_ar_addr),
        .slv_ar_len_o(s_ar_len), .slv_ar_size_o(s_ar_size), .slv_ar_burst_o(s_ar_burst),
        .slv_r_valid_i(1'b0), .slv_r_ready_o(s_r_ready), .slv_r_id_i('0), .slv_r_data_i('0),
        .slv_r_resp_i(RespOkay), .slv_r_last_i(1'b0),
        .reg_valid_i(clr_irq), .reg_write_i(1'b1), .reg_addr_i(RegIrq), .reg_wdata_i(32'h3),
        .reg_rdata_o(rg_rdata), .reg_error_o(rg_err),
        .irq_o(irq), .reset_req_o(rst_req), .reset_ack_i(rst_ack));
    end

    // reset unit: acknowledge 3 cycles after the request, then the
    // subordinate and the manager start afresh
    logic [2:0] req_sh = '0;
    always @(posedge clk) req_sh <= {req_sh[1:0], rst_req};
    assign rst_ack = rst_req && req_sh[2];
    wire fire = rst_req && rst_ack;

    // subordinate at full speed; the stall switches act at once
    int  s_beats = 0, b_wait = -1;
    bit  mgr_fault_off = 0;   // a faulty manager behaves again once the fault is flagged
    assign s_aw_ready = (stage != 1);
    assign s_w_ready  = (stage != 3) && !(stage == 4 && s_beats >= 1);

    int  beat = 0;
    bit  in_w = 0, in_b = 0, first_w = 1, first_b = 1;
    always @(posedge clk) begin
      if (fire) begin
        n_rst[g]++;
        s_beats = 0; b_wait = -1; s_b_valid <= 0;
        // the transaction is over for the manager as well
        aw_valid <= 0; w_valid <= 0; w_last <= 0; b_ready <= 0;
        in_w = 0; in_b = 0; done[g] = 1;
      end else begin
        // subordinate
        if (s_w_valid && s_w_ready) begin
          s_beats++;
          if (s_w_last && stage != 5) b_wait = 2;
        end
        if (b_wait > 0) b_wait--;
        else if (b_wait == 0) begin s_b_valid <= 1; s_b_id <= s_aw_id; b_wait = -1; end
        if (s_b_valid && s_b_ready) s_b_valid <= 0;
        // manager
        if (start && !aw_valid && !in_w && !in_b && !done[g]) begin
          aw_valid <= 1; t_start[g][1] = cyc; beat = 0; first_w = 1; first_b = 1;
        end
        if (aw_valid && aw_ready) begin
          aw_valid <= 0; in_w = 1; t_start[g][2] = cyc;
        end
        if (in_w && (stage != 2 || mgr_fault_off)) begin
          if (!w_valid) begin
            w_valid <= 1; w_data <= 64'(beat); w_last <= (beat == Len);
          end
        end
        if (w_valid && first_w) begin t_start[g][3] = cyc; first_w = 0; end
        if (w_valid && w_ready) begin
          if (beat == 0) t_start[g][4] = cyc;
          beat++;
          if (w_last) begin
            w_valid <= 0; w_last <= 0; in_w = 0; in_b = 1; t_start[g][5] = cyc;
          end else begin
            w_data <= 64'(beat); w_last <= (beat == Len);
          end
        end
        if (in_b) begin
          b_ready <= (stage != 6) || mgr_fault_off;
          if (b_valid && first_b) begin t_start[g][6] = cyc; first_b = 0; end
          if (b_valid && b_ready) begin
            got_b[g] = 1; b_resp[g] = resp; in_b = 0; b_ready <= 0; done[g] = 1;
          end
        end
      end
      if (irq && t_irq[g] < 0) begin t_irq[g] = cyc; mgr_fault_off = 1; end
      if (start == 0) mgr_fault_off = 0;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit all_done();
    for (int g = 0; g < NL; g++) if (!done[g]) return 0;
    return 1;
  endfunction

  // one run of the write in all lanes
  task automatic run(input int st);
    int n = 0;
    stage = st;
    for (int g = 0; g < NL; g++) begin
      t_irq[g] = -1; n_rst[g] = 0; done[g] = 0; got_b[g] = 0; b_resp[g] = 2'b00;
      for (int p = 0; p < 7; p++) t_start[g][p] = -1;
    end
    @(negedge clk); start = 1;
    while (!all_done() && n < 2000) begin @(negedge clk); n++; end
    chk(all_done(), $sformatf("stage %0d finished in all TMUs", st));
    start = 0; stage = 0;
    repeat (20) @(negedge clk);
    clr_irq = 1;
    @(negedge clk);
    clr_irq = 0;
    @(negedge clk);
    chk(!gen_lane[0].irq && !gen_lane[1].irq && !gen_lane[2].irq && !gen_lane[3].irq,
        "interrupt cleared");
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat[NL], bud, slack;
    string names[7] = '{"none", "AWVLD_AWRDY", "AWRDY_WVLD", "WVLD_WRDY", "WFIRST_WLAST", "WLAST_BVLD", "BVLD_BRDY"};
    for (int g = 0; g < NL; g++) begin n_rst[g] = 0; t_irq[g] = -1; done[g] = 0; got_b[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // fault-free: the reset budgets hold a full-speed 250-beat write
    run(0);
    for (int g = 0; g < NL; g++) begin
      chk(t_irq[g] < 0, $sformatf("lane %0d: no fault on a good write", g));
      chk(got_b[g] && b_resp[g] == RespOkay, $sformatf("lane %0d: OKAY response", g));
    end

    $display("stage          Fc latency  Tc latency  Fc/32 latency  Tc/32 latency  (Fc budget / Tc budget)");
    for (int st = 1; st <= 6; st++) begin
      run(st);
      for (int g = 0; g < NL; g++) lat[g] = t_irq[g] - t_start[g][(g % 2 == 0) ? st : 1];
      $display("%-14s %10d  %10d  %13d  %13d  (%0d / %0d)", names[st], lat[0], lat[1], lat[2], lat[3],
               PhaseBudget[st], Total);
      // the interrupt is registered: it follows the fault by one cycle; a
      // prescaled counter may also lose up to one step at the start and
      // holds a spare tick
      for (int g = 0; g < NL; g++) begin
        bud = (g % 2 == 0) ? PhaseBudget[st] : Total;
        slack = (Step[g] > 1) ? 2 * Step[g] + 2 : 2;
        chk(t_irq[g] >= 0 && lat[g] >= bud && lat[g] <= bud + slack,
            $sformatf("%s: lane %0d latency %0d, budget %0d", names[st], g, lat[g], bud));
      end
      for (int g = 0; g < NL; g++) begin
        chk(n_rst[g] == 1, $sformatf("%s: lane %0d reset handshake", names[st], g));
        if (st > 1)
          chk(got_b[g] && b_resp[g] == RespSlvErr, $sformatf("%s: lane %0d SLVERR response", names[st], g));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
