// tb_tmu_regs: checks the register block: reset values (enable, interrupt and
// reset enables set; budgets 10/20/10/0/20/10 and 1 per beat), writes and
// read-back of every budget, interrupt set by a fault pulse and cleared by
// writing 1, interrupt masking, the error and latency logs and the
// completion and fault counters, and the error flag for unmapped addresses.
module tb_tmu_regs;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic        v, we, err;
  logic [7:0]  addr;
  logic [31:0] wdata, rdata;
  logic        en, ren, irq;
  logic [5:0][15:0] wb;
  logic [3:0][15:0] rb;
  logic [15:0] wbeat, rbeat;
  logic wf, rf, wd, rd;
  err_info_t werr, rerr;
  logic [47:0] wea, rea;
  logic [5:0][9:0] wlat;
  logic [3:0][9:0] rlat;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tmu_regs #(.AddrWidth(48), .LatWidth(10)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_valid_i(v), .reg_write_i(we), .reg_addr_i(addr),
    .reg_wdata_i(wdata), .reg_rdata_o(rdata), .reg_error_o(err),
    .enable_o(en), .reset_en_o(ren), .w_budget_o(wb), .w_beat_o(wbeat), .r_budget_o(rb), .r_beat_o(rbeat),
    .w_fault_i(wf), .r_fault_i(rf), .w_err_i(werr), .w_err_addr_i(wea), .r_err_i(rerr), .r_err_addr_i(rea),
    .w_lat_i(wlat), .r_lat_i(rlat), .w_done_i(wd), .r_done_i(rd), .irq_o(irq));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); v = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); v = 0; we = 0;
  endtask
  task automatic rdchk(input logic [7:0] a, input logic [31:0] exp, input string what);
    @(negedge clk); v = 1; we = 0; addr = a; #1;
    chk(rdata == exp && !err, $sformatf("%s: read %h expected %h", what, rdata, exp));
    @(negedge clk); v = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vals[6] = '{10, 20, 10, 0, 20, 10};
    v = 0; we = 0; addr = 0; wdata = 0; wf = 0; rf = 0; wd = 0; rd = 0;
    werr = '0; rerr = '0; wea = '0; rea = '0; wlat = '0; rlat = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(en && ren && !irq, "reset control values");
    for (int p = 0; p < 6; p++) rdchk(RegWBudget0 + 8'(4 * p), 32'(vals[p]), "write budget reset value");
    for (int p = 0; p < 4; p++) rdchk(RegRBudget0 + 8'(4 * p), 32'(vals[p]), "read budget reset value");
    rdchk(RegWBeat, 32'd1, "write beat budget reset value");
    // budgets are writable
    for (int p = 0; p < 6; p++) wr(RegWBudget0 + 8'(4 * p), 32'(100 + p));
    for (int p = 0; p < 4; p++) wr(RegRBudget0 + 8'(4 * p), 32'(200 + p));
    wr(RegWBeat, 32'd3); wr(RegRBeat, 32'd4);
    for (int p = 0; p < 6; p++) chk(wb[p] == 16'(100 + p), "write budget output");
    for (int p = 0; p < 4; p++) chk(rb[p] == 16'(200 + p), "read budget output");
    chk(wbeat == 16'd3 && rbeat == 16'd4, "beat budget outputs");
    for (int p = 0; p < 4; p++) rdchk(RegRBudget0 + 8'(4 * p), 32'(200 + p), "read budget read-back");
    // fault -> interrupt, logs
    werr = '{code: ERR_TIMEOUT, phase: 3'd2, id: 8'd1, slot: 8'd5};
    wea  = 48'h1234_5678;
    for (int p = 0; p < 6; p++) wlat[p] = 10'(7 * p + 1);
    @(negedge clk); wf = 1; wd = 1;
    @(negedge clk); wf = 0; wd = 0;
    chk(irq, "interrupt after write fault");
    rdchk(RegIrq, 32'd1, "interrupt status");
    rdchk(RegWErr, 32'(werr), "write error record");
    rdchk(RegWErrAddr, 32'h1234_5678, "write error address");
    for (int p = 0; p < 6; p++) rdchk(RegWLat0 + 8'(4 * p), 32'(7 * p + 1), "write latency log");
    rdchk(RegFaults, 32'd1, "fault counter");
    rdchk(RegWCount, 32'd1, "write completion counter");
    wr(RegIrq, 32'd1);
    chk(!irq, "interrupt cleared by writing 1");
    // masking
    wr(RegCtrl, 32'b101);
    @(negedge clk); rf = 1; rd = 1;
    @(negedge clk); rf = 0; rd = 0;
    chk(!irq, "interrupt masked");
    rdchk(RegIrq, 32'd2, "read fault recorded while masked");
    rdchk(RegRCount, 32'd1, "read completion counter");
    wr(RegCtrl, 32'b111);
    chk(irq, "interrupt visible after unmask");
    wr(RegCtrl, 32'b010);
    chk(!en && !ren, "enable and reset enable cleared");
    @(negedge clk); v = 1; addr = 8'hfc; #1;
    chk(err, "unmapped address flagged");
    @(negedge clk); v = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
