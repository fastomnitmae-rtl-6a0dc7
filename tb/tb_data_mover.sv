// tb_data_mover: runs each data-mover command through the AXI-MM master into a
// behavioural memory with back-pressure. A stand-in compute core accepts beats
// with random stalls and, in update passes, returns each beat plus one after a
// random delay. Checks the weights-buffer writes, the label pushes and X-buffer
// writes of a batch of records, the beats seen by the core, the memory after
// an update pass and after the result write, and that busy falls only when
// every write has landed.
`timescale 1ns/1ps
module tb_data_mover;
  import tmae_pkg::*;
  localparam int unsigned AW = 32, DW = 128, BY = DW / 8, F = 300, XB = 3, REC = XB + 1, DEPTH = 1 << 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_start, busy;
  dm_cmd_t cmd;
  logic [DW-1:0] result_data;
  logic rd_start, rd_busy, rd_valid, rd_ready, wr_start, wr_busy, wr_valid, wr_ready;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [31:0] rd_beats, wr_beats;
  logic [DW-1:0] rd_data, wr_data;
  logic w_wr_en, lbl_flush, lbl_push, lbl_din, x_wr_en;
  logic [2:0] w_wr_beat;
  logic [DW-1:0] w_wr_data, x_wr_data;
  logic [11:0] x_wr_addr;
  logic core_valid, core_ready, core_out_valid, core_out_ready, core_idle;
  logic [DW-1:0] core_data, core_out_data;
  logic [AW-1:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [DW-1:0] rdata, wdata;
  logic [BY-1:0] wstrb;

  data_mover #(.ADDR_W(AW), .DATA_W(DW), .FEATURES(F), .XB_AW(12), .WB_W(3)) dut (
    .clk, .rst_n, .cmd_start, .cmd, .busy, .result_data,
    .rd_start, .rd_addr, .rd_beats, .rd_busy, .rd_valid, .rd_data, .rd_ready,
    .wr_start, .wr_addr, .wr_beats, .wr_busy, .wr_valid, .wr_data, .wr_ready,
    .w_wr_en, .w_wr_beat, .w_wr_data, .lbl_flush, .lbl_push, .lbl_din, .x_wr_en, .x_wr_addr, .x_wr_data,
    .core_valid, .core_data, .core_ready, .core_out_valid, .core_out_data, .core_out_ready, .core_idle);

  axi_mm_master #(.ADDR_W(AW), .DATA_W(DW), .MAX_BURST(16)) u_axi (
    .clk, .rst_n, .rd_start, .rd_addr, .rd_beats, .rd_busy, .rd_valid, .rd_data, .rd_ready,
    .wr_start, .wr_addr, .wr_beats, .wr_busy, .wr_valid, .wr_data, .wr_ready,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.ADDR_W(AW), .DATA_W(DW), .DEPTH(DEPTH), .STALL_PCT(20)) mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  // stand-in core
  logic [DW-1:0] cq[$], seen[$];
  always @(posedge clk) begin
    if (core_valid && core_ready) begin
      seen.push_back(core_data);
      if (cmd.op == DM_UPDATE) cq.push_back(core_data + 1);
    end
    if (core_out_valid && core_out_ready) void'(cq.pop_front());
    core_ready     <= ($urandom % 4) != 0;
  end
  always @(negedge clk) begin
    core_out_valid = (cq.size() > 0) && (($urandom % 3) != 0);
    core_out_data  = (cq.size() > 0) ? cq[0] : '0;
  end
  assign core_idle = (cq.size() == 0);

  // buffer-port monitors
  logic [DW-1:0] wbuf [8], xbuf [64];
  bit lbl [$];
  int n_w = 0, n_x = 0, n_flush = 0;
  always @(posedge clk) begin
    if (w_wr_en) begin wbuf[w_wr_beat] = w_wr_data; n_w++; end
    if (x_wr_en) begin xbuf[x_wr_addr] = x_wr_data; n_x++; end
    if (lbl_flush) begin lbl.delete(); n_flush++; end
    if (lbl_push) lbl.push_back(lbl_din);
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input dm_op_e op, input int unsigned addr, input int unsigned beats);
    @(negedge clk);
    cmd = '{op: op, addr: addr, beats: beats}; cmd_start = 1;
    @(negedge clk); cmd_start = 0;
    check(busy, "busy after command");
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] old_beat [40];
    cmd_start = 0; cmd = '0; result_data = {32'd4, 32'd3, 32'd2, RESULT_MAGIC};
    for (int i = 0; i < DEPTH; i++) mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights: 8 beats at beat 16
    run(DM_LOAD_WEIGHTS, 16 * BY, 8);
    check(n_w == 8, "eight weight beats written");
    for (int b = 0; b < 8; b++) check(wbuf[b] == mem.mem[16 + b], $sformatf("weight beat %0d", b));
    // batch of 3 records at beat 100
    run(DM_LOAD_BATCH, 100 * BY, 3 * REC);
    check(n_flush == 1, "label FIFO flushed once");
    check(lbl.size() == 3, "three labels pushed");
    for (int r = 0; r < 3; r++) begin
      check(lbl[r] == mem.mem[100 + r*REC][0], $sformatf("label %0d", r));
      for (int k = 0; k < XB; k++) check(xbuf[r*XB + k] == mem.mem[100 + r*REC + 1 + k], $sformatf("X beat %0d.%0d", r, k));
    end
    check(n_x == 3 * XB, "X beats written");
    // evaluation pass: 40 beats at beat 250 (crosses 4 KB at beat 256)
    seen.delete();
    run(DM_EVAL, 250 * BY, 40);
    check(seen.size() == 40, "core received 40 beats");
    for (int i = 0; i < 40 && i < seen.size(); i++) if (seen[i] != mem.mem[250 + i]) begin failures++; break; end
    checks++;
    // update pass on the same region
    for (int i = 0; i < 40; i++) old_beat[i] = mem.mem[250 + i];
    seen.delete();
    run(DM_UPDATE, 250 * BY, 40);
    for (int i = 0; i < 40; i++) check(mem.mem[250 + i] == old_beat[i] + 1, $sformatf("updated beat %0d", i));
    check(mem.mem[249] != old_beat[0] + 1 && mem.mem[290] != old_beat[39] + 1, "neighbours untouched");
    // result record
    run(DM_RESULT, 8 * BY, 1);
    check(mem.mem[8] == result_data, "result record written");
    check(mem.errors == 0, "no AXI protocol errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
