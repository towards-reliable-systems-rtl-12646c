// tb_tmu_top: end-to-end test of the TMU at its default parameters (Full-
// Counter, 4 unique IDs x 4 transactions, 48-bit address, 64-bit data,
// 8-bit manager IDs). Around the TMU it builds:
//  - a pipelined AXI manager: AW, W, B, AR and R run as separate processes;
//    requests use 8 manager IDs (more than the 4 remapped IDs, so the
//    remapper and the tracking table both fill up and stall);
//  - a behavioural AXI subordinate that answers in order with random
//    ready/valid gaps, checks the write data and returns read data made from
//    the address and beat number;
//  - a reset unit that acknowledges a reset request after a few cycles and
//    then clears the subordinate.
// Either side can be told to misbehave once: the subordinate can stall in
// any phase, return a response for an ID with nothing outstanding, or end a
// read burst early; the manager can withhold write data, refuse the B or R
// response, or end a write burst early. The test runs fault-free random
// traffic, then each fault in turn, each followed by more traffic. It checks
// that every request gets exactly one response (SLVERR for the aborted
// ones), that reads return len+1 beats with the last flag on the final one,
// that data is intact, that the interrupt rises and the error register
// holds the expected code and phase, and that the reset handshake happens.
// Each mechanism is counted, and the test fails if one never happened.
module tb_tmu_top;
  import tmu_pkg::*;
  localparam int IdW = 8, AW = 48, DW = 64, SIdW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUT
  logic m_aw_valid = 0, m_aw_ready;  logic [IdW-1:0] m_aw_id = 0;
  logic [AW-1:0] m_aw_addr = 0;      logic [7:0] m_aw_len = 0;
  logic m_w_valid = 0, m_w_ready, m_w_last = 0; logic [DW-1:0] m_w_data = 0;
  logic m_b_valid, m_b_ready = 0;    logic [IdW-1:0] m_b_id; logic [1:0] m_b_resp;
  logic m_ar_valid = 0, m_ar_ready;  logic [IdW-1:0] m_ar_id = 0;
  logic [AW-1:0] m_ar_addr = 0;      logic [7:0] m_ar_len = 0;
  logic m_r_valid, m_r_ready = 0, m_r_last; logic [IdW-1:0] m_r_id;
  logic [DW-1:0] m_r_data; logic [1:0] m_r_resp;

  logic s_aw_valid, s_aw_ready, aw_rdy_q = 0; logic [SIdW-1:0] s_aw_id; logic [AW-1:0] s_aw_addr;
  logic [7:0] s_aw_len; logic [2:0] s_aw_size; logic [1:0] s_aw_burst;
  logic s_w_valid, s_w_ready, w_rdy_q = 0, s_w_last; logic [DW-1:0] s_w_data; logic [DW/8-1:0] s_w_strb;
  logic s_b_valid = 0, s_b_ready; logic [SIdW-1:0] s_b_id = 0;
  logic s_ar_valid, s_ar_ready, ar_rdy_q = 0; logic [SIdW-1:0] s_ar_id; logic [AW-1:0] s_ar_addr;
  logic [7:0] s_ar_len; logic [2:0] s_ar_size; logic [1:0] s_ar_burst;
  logic s_r_valid = 0, s_r_ready, s_r_last = 0; logic [SIdW-1:0] s_r_id = 0;
  logic [DW-1:0] s_r_data = 0;

  logic rg_valid = 0, rg_write = 0, rg_err; logic [7:0] rg_addr = 0;
  logic [31:0] rg_wdata = 0, rg_rdata;
  logic irq, rst_req, rst_ack;

  tmu_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mst_aw_valid_i(m_aw_valid), .mst_aw_ready_o(m_aw_ready), .mst_aw_id_i(m_aw_id),
    .mst_aw_addr_i(m_aw_addr), .mst_aw_len_i(m_aw_len), .mst_aw_size_i(3'd3), .mst_aw_burst_i(2'd1),
    .mst_w_valid_i(m_w_valid), .mst_w_ready_o(m_w_ready), .mst_w_data_i(m_w_data),
    .mst_w_strb_i('1), .mst_w_last_i(m_w_last),
    .mst_b_valid_o(m_b_valid), .mst_b_ready_i(m_b_ready), .mst_b_id_o(m_b_id), .mst_b_resp_o(m_b_resp),
    .mst_ar_valid_i(m_ar_valid), .mst_ar_ready_o(m_ar_ready), .mst_ar_id_i(m_ar_id),
    .mst_ar_addr_i(m_ar_addr), .mst_ar_len_i(m_ar_len), .mst_ar_size_i(3'd3), .mst_ar_burst_i(2'd1),
    .mst_r_valid_o(m_r_valid), .mst_r_ready_i(m_r_ready), .mst_r_id_o(m_r_id),
    .mst_r_data_o(m_r_data), .mst_r_resp_o(m_r_resp), .mst_r_last_o(m_r_last),
    .slv_aw_valid_o(s_aw_valid), .slv_aw_ready_i(s_aw_ready), .slv_aw_id_o(s_aw_id),
    .slv_aw_addr_o(s_aw_addr), .slv_aw_len_o(s_aw_len), .slv_aw_size_o(s_aw_size), .slv_aw_burst_o(s_aw_burst),
    .slv_w_valid_o(s_w_valid), .slv_w_ready_i(s_w_ready), .slv_w_data_o(s_w_data),
    .slv_w_strb_o(s_w_strb), .slv_w_last_o(s_w_last),
    .slv_b_valid_i(s_b_valid), .slv_b_ready_o(s_b_ready), .slv_b_id_i(s_b_id), .slv_b_resp_i(RespOkay),
    .slv_ar_valid_o(s_ar_valid), .slv_ar_ready_i(s_ar_ready), .slv_ar_id_o(s_ar_id),
    .slv_ar_addr_o(s_ar_addr), .slv_ar_len_o(s_ar_len), .slv_ar_size_o(s_ar_size), .slv_ar_burst_o(s_ar_burst),
    .slv_r_valid_i(s_r_valid), .slv_r_ready_o(s_r_ready), .slv_r_id_i(s_r_id),
    .slv_r_data_i(s_r_data), .slv_r_resp_i(RespOkay), .slv_r_last_i(s_r_last),
    .reg_valid_i(rg_valid), .reg_write_i(rg_write), .reg_addr_i(rg_addr), .reg_wdata_i(rg_wdata),
    .reg_rdata_o(rg_rdata), .reg_error_o(rg_err),
    .irq_o(irq), .reset_req_o(rst_req), .reset_ack_i(rst_ack));

  function automatic logic [DW-1:0] pattern(input logic [AW-1:0] addr, input int beat);
    return {16'hA5C3, addr[31:0], 16'(beat)} ^ DW'(addr[47:32]);
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ------------------------------------------------------ fault switches
  // subordinate: 1 AW stall, 2 W never ready, 3 burst stall, 4 no B,
  //   5 B for an ID with nothing outstanding, 6 AR stall, 7 no R,
  //   8 R burst stall, 9 early r_last, 10 R for an unused ID
  // manager: 11 no W data, 12 B never ready, 13 R never ready, 14 early w_last
  int fault_sel = 0;
  bit slow_b = 0;   // subordinate holds every B for b_delay cycles
  int b_delay = 80;

  // ---------------------------------------------------------- reset unit
  logic [3:0] req_sh = '0;
  always @(posedge clk) req_sh <= {req_sh[2:0], rst_req};
  assign rst_ack = rst_req && req_sh[3];
  wire rst_fire = rst_req && rst_ack;

  // ---------------------------------------------------- subordinate model
  typedef struct { logic [SIdW-1:0] id; logic [AW-1:0] addr; int len; int t; } stxn_t;
  stxn_t s_awq[$], s_bq[$], s_arq[$];
  int s_wbeat = 0, s_rbeat = 0, n_wdata_err = 0;
  bit w_stuck = 0, r_stuck = 0;
  // fault switches act on the ready lines at once
  assign s_aw_ready = aw_rdy_q && fault_sel != 1;
  assign s_w_ready  = w_rdy_q && fault_sel != 2 && !w_stuck;
  assign s_ar_ready = ar_rdy_q && fault_sel != 6;
  always @(posedge clk) begin
    stxn_t t;
    if (!rst_n || rst_fire) begin
      s_awq.delete(); s_bq.delete(); s_arq.delete();
      s_wbeat = 0; s_rbeat = 0; w_stuck = 0; r_stuck = 0;
      aw_rdy_q <= 0; w_rdy_q <= 0; s_b_valid <= 0; ar_rdy_q <= 0; s_r_valid <= 0; s_r_last <= 0;
    end else begin
      if (s_aw_valid && s_aw_ready) begin
        t.id = s_aw_id; t.addr = s_aw_addr; t.len = int'(s_aw_len); t.t = 0;
        s_awq.push_back(t);
      end
      if (s_w_valid && s_w_ready) begin
        if (s_awq.size() == 0) chk(0, "subordinate got W before AW");
        else begin
          if (s_w_data != pattern(s_awq[0].addr, s_wbeat)) n_wdata_err++;
          if (s_w_last != (s_wbeat == s_awq[0].len) && fault_sel != 14)
            chk(0, "subordinate saw a wrong w_last");
          s_wbeat++;
          if (fault_sel == 3) w_stuck = 1;
          if (s_w_last) begin
            t = s_awq.pop_front();
            t.t = cyc + (slow_b ? b_delay : int'($urandom_range(0, 6)));
            if (fault_sel != 4) s_bq.push_back(t);
            s_wbeat = 0;
          end
        end
      end
      aw_rdy_q <=  ($urandom_range(0, 3) != 0) && s_awq.size() < 6;
      w_rdy_q  <= ($urandom_range(0, 3) != 0);
      if (s_b_valid && s_b_ready) begin
        void'(s_bq.pop_front());
        s_b_valid <= 0;
      end else if (!s_b_valid && s_bq.size() > 0 && s_bq[0].t <= cyc) begin
        s_b_valid <= 1;
        s_b_id    <= (fault_sel == 5) ? s_bq[0].id + 1'b1 : s_bq[0].id;
      end
      // reads
      if (s_ar_valid && s_ar_ready) begin
        t.id = s_ar_id; t.addr = s_ar_addr; t.len = int'(s_ar_len);
        t.t = cyc + int'($urandom_range(1, 5));
        s_arq.push_back(t);
      end
      ar_rdy_q <=  ($urandom_range(0, 3) != 0) && s_arq.size() < 6;
      if (s_r_valid && s_r_ready) begin
        if (s_r_last) begin void'(s_arq.pop_front()); s_rbeat = 0; end
        else s_rbeat++;
        if (fault_sel == 8) r_stuck = 1;
      end
      if (s_arq.size() > 0 && s_arq[0].t <= cyc && fault_sel != 7 && !r_stuck &&
          (!s_r_valid || s_r_ready) && $urandom_range(0, 3) != 0) begin
        s_r_valid <= 1;
        s_r_id    <= (fault_sel == 10) ? s_arq[0].id + 1'b1 : s_arq[0].id;
        s_r_data  <= pattern(s_arq[0].addr, s_rbeat);
        s_r_last  <= (s_rbeat == s_arq[0].len) || (fault_sel == 9 && s_rbeat == 1);
      end else if (s_r_valid && s_r_ready) begin
        s_r_valid <= 0;
      end
    end
  end

  // -------------------------------------------------------- manager model
  typedef struct { int sn; logic [IdW-1:0] id; logic [AW-1:0] addr; int len; } mtxn_t;
  mtxn_t aw_todo[$], w_todo[$], ar_todo[$];
  mtxn_t wexp[256][$], rexp[256][$];
  int    rbeat_cnt[256];
  bit    b_got[int];
  int    sn = 0;
  int    n_w_issued = 0, n_r_issued = 0, n_b_ok = 0, n_b_err = 0, n_r_ok = 0, n_r_err = 0;
  int    n_r_err_beats = 0, n_w_dropped = 0;

  task automatic post_write(input logic [IdW-1:0] id, input int len);
    mtxn_t t;
    t.sn = sn++; t.id = id; t.len = len;
    t.addr = {16'h00C0, 16'(t.sn), 16'(id) << 8};
    aw_todo.push_back(t); n_w_issued++;
  endtask
  task automatic post_read(input logic [IdW-1:0] id, input int len);
    mtxn_t t;
    t.sn = sn++; t.id = id; t.len = len;
    t.addr = {16'h00D0, 16'(t.sn), 16'(id) << 8};
    ar_todo.push_back(t); n_r_issued++;
  endtask

  // AW channel
  initial begin
    mtxn_t t;
    bit hs;
    forever begin
      @(posedge clk);
      hs = m_aw_valid && m_aw_ready;
      if (hs) begin
        w_todo.push_back(t);
        wexp[t.id].push_back(t);
      end
      @(negedge clk);
      if (hs) m_aw_valid = 0;
      if (!m_aw_valid && aw_todo.size() > 0 && $urandom_range(0, 2) != 0) begin
        t = aw_todo.pop_front();
        m_aw_valid = 1; m_aw_id = t.id; m_aw_addr = t.addr; m_aw_len = 8'(t.len);
      end
    end
  end

  // W channel: data follows AW order; an aborted write's remaining data is dropped
  initial begin
    mtxn_t t;
    int beat;
    bit active, hs;
    active = 0; beat = 0;
    forever begin
      @(posedge clk);
      hs = m_w_valid && m_w_ready;
      @(negedge clk);
      if (hs) begin
        m_w_valid = 0;
        beat++;
        if (beat > t.len) active = 0;
      end
      if (active && b_got.exists(t.sn)) begin
        active = 0; n_w_dropped++;
      end
      if (!active && w_todo.size() > 0) begin
        t = w_todo.pop_front(); active = 1; beat = 0;
      end
      if (active && !m_w_valid && fault_sel != 11 && $urandom_range(0, 3) != 0) begin
        m_w_valid = 1;
        m_w_data  = pattern(t.addr, beat);
        m_w_last  = (beat == t.len) || (fault_sel == 14 && beat == 1);
        if (fault_sel == 14 && beat == 1) active = 0;
      end
    end
  end

  // B channel
  initial begin
    mtxn_t t;
    forever begin
      @(posedge clk);
      if (m_b_valid && m_b_ready) begin
        if (wexp[m_b_id].size() == 0) chk(0, $sformatf("B for id %0d with nothing outstanding", m_b_id));
        else begin
          t = wexp[m_b_id].pop_front();
          b_got[t.sn] = 1;
          if (m_b_resp == RespOkay) n_b_ok++; else n_b_err++;
          if (m_b_resp != RespOkay && last_fault_read) n_peer++;
        end
      end
      @(negedge clk);
      m_b_ready = (fault_sel != 12) && ($urandom_range(0, 3) != 0);
    end
  end

  // AR channel
  initial begin
    mtxn_t t;
    bit hs;
    forever begin
      @(posedge clk);
      hs = m_ar_valid && m_ar_ready;
      if (hs) rexp[t.id].push_back(t);
      @(negedge clk);
      if (hs) m_ar_valid = 0;
      if (!m_ar_valid && ar_todo.size() > 0 && $urandom_range(0, 2) != 0) begin
        t = ar_todo.pop_front();
        m_ar_valid = 1; m_ar_id = t.id; m_ar_addr = t.addr; m_ar_len = 8'(t.len);
      end
    end
  end

  // R channel
  initial begin
    mtxn_t t;
    foreach (rbeat_cnt[i]) rbeat_cnt[i] = 0;
    forever begin
      @(posedge clk);
      if (m_r_valid && m_r_ready) begin
        if (rexp[m_r_id].size() == 0) chk(0, $sformatf("R for id %0d with nothing outstanding", m_r_id));
        else begin
          t = rexp[m_r_id][0];
          if (m_r_resp == RespOkay)
            chk(m_r_data == pattern(t.addr, rbeat_cnt[m_r_id]), "read data intact");
          else n_r_err_beats++;
          rbeat_cnt[m_r_id]++;
          if (m_r_last) begin
            chk(rbeat_cnt[m_r_id] == t.len + 1 || fault_sel == 9,
                $sformatf("read id %0d got %0d beats for len %0d", m_r_id, rbeat_cnt[m_r_id], t.len));
            void'(rexp[m_r_id].pop_front());
            rbeat_cnt[m_r_id] = 0;
            if (m_r_resp == RespOkay) n_r_ok++; else n_r_err++;
            if (m_r_resp != RespOkay && !last_fault_read) n_peer++;
          end
        end
      end
      @(negedge clk);
      m_r_ready = (fault_sel != 13) && ($urandom_range(0, 3) != 0);
    end
  end

  // ------------------------------------------------------- observation
  int n_ott_stall = 0, n_remap_stall = 0, n_reset = 0, n_irq = 0, n_wfault = 0, n_rfault = 0;
  int n_peer = 0, n_max_out = 0;
  err_info_t first_err;
  bit seen_err, err_pend = 0, err_from_w = 0, last_fault_read = 0;
  logic irq_q = 0;
  always @(posedge clk) begin
    if (dut.i_wguard.aw_valid_i && !dut.i_wguard.i_ott.enq_ok_o) n_ott_stall++;
    if (m_aw_valid && !dut.int_aw_valid) n_remap_stall++;
    if ($countones(dut.i_wguard.i_ott.slot_valid_o) > n_max_out)
      n_max_out = $countones(dut.i_wguard.i_ott.slot_valid_o);
    if (rst_fire) n_reset++;
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (dut.w_fault) n_wfault++;
    if (dut.r_fault) n_rfault++;
    // the error record is registered: read it the cycle after the fault
    if (err_pend) begin
      err_pend = 0;
      first_err = err_from_w ? dut.w_err : dut.r_err;
      if (fault_sel == 0)
        $display("unexpected fault at cycle %0d: write=%0d code=%0d phase=%0d slot=%0d",
                  cyc, err_from_w, first_err.code, first_err.phase, first_err.slot);
      seen_err = 1;
    end
    if ((dut.w_fault || dut.r_fault) && !seen_err && !err_pend) begin
      err_pend = 1;
      err_from_w = dut.w_fault;
    end
    if (dut.w_fault) last_fault_read = 0;
    else if (dut.r_fault) last_fault_read = 1;
  end

  // -------------------------------------------------------- register port
  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); rg_valid = 1; rg_write = 0; rg_addr = a; #1;
    d = rg_rdata;
    chk(!rg_err, "register read accepted");
    @(negedge clk); rg_valid = 0;
  endtask
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); rg_valid = 1; rg_write = 1; rg_addr = a; rg_wdata = d;
    @(negedge clk); rg_valid = 0; rg_write = 0;
  endtask

  task automatic random_traffic(input int n, input int maxlen);
    for (int i = 0; i < n; i++) begin
      if ($urandom_range(0, 1) == 0) post_write(IdW'($urandom_range(0, 7)), int'($urandom_range(0, maxlen)));
      else post_read(IdW'($urandom_range(0, 7)), int'($urandom_range(0, maxlen)));
    end
  endtask

  function automatic bit all_done();
    int n = 0;
    for (int i = 0; i < 256; i++) n += wexp[i].size() + rexp[i].size();
    return n == 0 && aw_todo.size() == 0 && ar_todo.size() == 0 && !m_aw_valid && !m_ar_valid;
  endfunction

  task automatic drain(input int limit, input string what);
    int n = 0;
    while (!all_done() && n < limit) begin @(negedge clk); n++; end
    chk(all_done(), $sformatf("%s: all requests answered", what));
  endtask

  // run one fault scenario: a single transaction of the given kind
  task automatic scenario(input int f, input bit is_read, input int len,
                          input err_e code, input bit exp_slverr);
    logic [31:0] d;
    int resets0, berr0, rerr0, n;
    resets0 = n_reset; berr0 = n_b_err; rerr0 = n_r_err;
    seen_err = 0;
    fault_sel = f;
    if (is_read) post_read(8'h21, len); else post_write(8'h11, len);
    n = 0;
    while (!seen_err && n < 3000) begin @(negedge clk); n++; end
    chk(seen_err, $sformatf("fault %0d detected", f));
    // a misbehaving manager must accept the abort responses
    if (f >= 11) fault_sel = 0;
    // the reset unit has reset the subordinate; the manager behaves again
    while (n_reset == resets0 && n < 3000) begin @(negedge clk); n++; end
    fault_sel = 0;
    drain(3000, $sformatf("fault %0d", f));
    chk(n_reset == resets0 + 1, $sformatf("fault %0d: one reset handshake", f));
    chk(first_err.code == code, $sformatf("fault %0d: code %0d expected %0d", f, first_err.code, code));
    if (exp_slverr)
      chk(is_read ? n_r_err == rerr0 + 1 : n_b_err == berr0 + 1,
          $sformatf("fault %0d: the aborted transaction got SLVERR", f));
    chk(irq, $sformatf("fault %0d: interrupt raised", f));
    reg_rd(is_read ? RegRErr : RegWErr, d);
    chk(d[21:19] == 3'(code), $sformatf("fault %0d: error register %h", f, d));
    reg_wr(RegIrq, 32'h3);
    @(negedge clk);
    chk(!irq, $sformatf("fault %0d: interrupt cleared", f));
    // traffic after recovery works
    random_traffic(20, 7);
    drain(5000, $sformatf("traffic after fault %0d", f));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int b_ok0;
    seen_err = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    reg_rd(RegCtrl, d);
    chk(d[2:0] == 3'b111, "control register reset value");
    reg_rd(RegWBudget0 + 8'h04, d);
    chk(d == 32'd20, "AW1 budget reset value");
    // The reset budgets assume a subordinate at full speed; the random
    // ready/valid gaps of this testbench need more slack per phase and beat.
    for (int p = 0; p < NumWPhases; p++) reg_wr(RegWBudget0 + 8'(4 * p), 32'd100);
    for (int p = 0; p < NumRPhases; p++) reg_wr(RegRBudget0 + 8'(4 * p), 32'd100);
    reg_wr(RegWBeat, 32'd8);
    reg_wr(RegRBeat, 32'd8);

    // fault-free random traffic, including long bursts
    random_traffic(400, 15);
    drain(40000, "random traffic");
    post_write(8'h05, 249);
    post_read(8'h05, 249);
    drain(5000, "250-beat bursts");
    chk(n_wfault == 0 && n_rfault == 0, "no fault on good traffic");
    chk(n_b_err == 0 && n_r_err == 0, "no SLVERR on good traffic");
    chk(n_wdata_err == 0, "write data intact");
    reg_rd(RegWLat0 + 8'h0c, d);
    chk(d != 0, "burst latency of the last write logged");
    reg_rd(RegWCount, d);
    chk(d == 32'(n_b_ok), $sformatf("completed-write counter %0d vs %0d", d, n_b_ok));

    // fill the table: slow B so 16 writes are outstanding
    slow_b = 1;
    for (int i = 0; i < 40; i++) post_write(IdW'(i % 4), 0);
    drain(20000, "table-filling writes");
    slow_b = 0;

    // faults, each in turn (error code, aborted transaction answered with SLVERR)
    scenario(1,  0, 3, ERR_TIMEOUT, 0);    // AW never ready
    scenario(11, 0, 3, ERR_TIMEOUT, 1);    // manager withholds W
    scenario(2,  0, 3, ERR_TIMEOUT, 1);    // W never ready
    scenario(3,  0, 7, ERR_TIMEOUT, 1);    // burst stalls
    scenario(4,  0, 3, ERR_TIMEOUT, 1);    // B never sent
    scenario(12, 0, 3, ERR_TIMEOUT, 1);    // manager refuses B
    scenario(5,  0, 3, ERR_UNREQ,   1);    // B for a wrong ID
    scenario(14, 0, 5, ERR_LAST,    1);    // early w_last
    scenario(6,  1, 3, ERR_TIMEOUT, 0);    // AR never ready
    scenario(7,  1, 3, ERR_TIMEOUT, 1);    // no R
    scenario(13, 1, 3, ERR_TIMEOUT, 1);    // manager refuses R
    scenario(8,  1, 7, ERR_TIMEOUT, 1);    // R burst stalls
    scenario(9,  1, 5, ERR_LAST,    1);    // early r_last
    scenario(10, 1, 3, ERR_UNREQ,   1);    // R for a wrong ID

    // a fault with concurrent traffic on the other side: both sides abort
    slow_b = 1; b_delay = 1000;
    for (int i = 0; i < 4; i++) post_write(IdW'(i), 3);
    random_traffic(10, 15);
    repeat (20) @(negedge clk);
    seen_err = 0;
    b_ok0 = n_reset;
    fault_sel = 7;
    while (n_reset == b_ok0) @(negedge clk);
    fault_sel = 0; slow_b = 0;
    drain(10000, "fault under load");
    reg_wr(RegIrq, 32'h3);

    // the same stall with recovery disabled: abort, but no reset request
    reg_wr(RegCtrl, 32'h3);
    b_ok0 = n_reset;
    fault_sel = 4;
    post_write(8'h33, 1);
    repeat (300) @(negedge clk);
    fault_sel = 0;
    drain(3000, "fault without reset");
    chk(n_reset == b_ok0, "no reset request when recovery is disabled");
    reg_wr(RegCtrl, 32'h7);
    reg_wr(RegIrq, 32'h3);
    random_traffic(20, 3);
    drain(5000, "traffic after unrecovered fault");

    // budgets are programmable: a 1-cycle B-wait budget times out at once
    reg_wr(RegWBudget0 + 8'h10, 32'd1);
    b_ok0 = n_wfault;
    for (int i = 0; i < 4; i++) post_write(8'h44, 0);
    drain(3000, "tight budget");
    reg_wr(RegWBudget0 + 8'h10, 32'd100);
    reg_wr(RegIrq, 32'h3);
    chk(n_wfault > b_ok0, "tight B-wait budget triggers a timeout");

    reg_rd(RegFaults, d);
    chk(d >= 16, $sformatf("fault counter %0d", d));

    // mechanism coverage
    $display("mechanisms: ott_stall=%0d remap_stall=%0d max_outstanding=%0d wfault=%0d rfault=%0d peer=%0d resets=%0d irq=%0d b_slverr=%0d r_slverr=%0d r_slverr_beats=%0d w_dropped=%0d",
             n_ott_stall, n_remap_stall, n_max_out, n_wfault, n_rfault, n_peer, n_reset, n_irq,
             n_b_err, n_r_err, n_r_err_beats, n_w_dropped);
    chk(n_ott_stall > 0, "stall on a full tracking table happened");
    chk(n_remap_stall > 0, "remapper stall happened");
    chk(n_max_out == 16, "all 16 tracking slots were used");
    chk(n_wfault > 0 && n_rfault > 0, "write and read faults happened");
    chk(n_peer > 0, "a fault on one side aborted the other");
    chk(n_reset >= 14, "reset handshakes happened");
    chk(n_irq >= 14, "interrupts happened");
    chk(n_b_err > 0 && n_r_err > 0 && n_r_err_beats > n_r_err, "aborts answered with SLVERR");
    chk(n_w_dropped > 0, "write data of an aborted write dropped");
    chk(n_wdata_err == 0, "write data intact");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
