// tb_tmae_accel_top: end-to-end test of the accelerator at reduced size.
//
// 64 features (128 literals), 3 engines, 7 clauses (groups of 3, 3 and 1),
// batches of 4 out of 10 examples, 2 epochs, T = 20, s = 2. A behavioural AXI4
// memory with random back-pressure holds examples, weights and states; the
// state matrix is placed across a 4 KB boundary. The host side is played over
// AXI-Lite. After the run every automaton state, the result record and the
// counter registers are compared with the reference model (tmae_tb_pkg), and
// each mechanism of the design is required to have happened at least once:
// evaluation and update passes, skipped (bypassed) update passes, Type Ia, Ib
// and II feedback, feedback blocked by a negative weight, state saturation,
// several batches, several epochs, memory back-pressure and 4 KB burst splits.
`timescale 1ns/1ps
module tb_tmae_accel_top;
  import tmae_pkg::*;
  import tmae_tb_pkg::*;

  localparam int unsigned F = 64, NE = 3, MAXC = 8, MAXB = 4, DATA_W = 128, ADDR_W = 32;
  localparam int unsigned LANES = DATA_W / 8, L = 2 * F, LW = L / LANES;
  localparam int unsigned XB = (F + DATA_W - 1) / DATA_W, REC = XB + 1;
  localparam int unsigned C = 7, NUM_EX = 10, EPOCHS = 2, T = 20, S_INV = 32768, SEED = 32'hC0FFEE;
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned RESULT_BASE = 32'h0000_0100, WEIGHT_BASE = 32'h0000_1000,
                          DATA_BASE = 32'h0000_2000, STATE_BASE = 32'h0001_0F80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;
  logic [ADDR_W-1:0] araddr, awaddr;
  logic [7:0]  arlen, awlen;
  logic [2:0]  arsize, awsize;
  logic [1:0]  arburst, awburst, rresp, bresp;
  logic        arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [DATA_W-1:0] rdata, wdata;
  logic [DATA_W/8-1:0] wstrb;
  logic busy, done;

  tmae_accel_top #(.NUM_ENGINES(NE), .MAX_CLAUSES(MAXC), .FEATURES(F), .MAX_BATCH(MAXB)) dut (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid,
    .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready, .s_axil_araddr, .s_axil_arvalid,
    .s_axil_arready, .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready),
    .busy, .done
  );

  axi_mem_model #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .DEPTH(1 << 13), .STALL_PCT(20)) mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wstrb = 4'hF; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk); s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk); s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk);
  endtask

  // mechanism monitors
  int unsigned n_core_stall = 0, n_batches = 0, n_split4k = 0, n_eval = 0, n_upd = 0;
  int unsigned n_beats = 0, n_upd_beats = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_dm.core_valid && !dut.u_dm.core_ready) n_core_stall++;
    if (dut.u_dm.cmd_start && dut.u_dm.cmd.op == DM_LOAD_BATCH) n_batches++;
    if (dut.u_dm.cmd_start && dut.u_dm.cmd.op == DM_EVAL) n_eval++;
    if (dut.u_dm.cmd_start && dut.u_dm.cmd.op == DM_UPDATE) begin n_upd++; n_upd_beats += dut.u_dm.cmd.beats; end
    if (dut.u_dm.core_valid && dut.u_dm.core_ready) n_beats++;
    if (arvalid && arready && arlen != 8'd15 && (((araddr + (arlen + 1) * BYTES) & 32'hFFF) == 0)) n_split4k++;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned st0[], stref[];
  int  w[];
  bit  xs[], ys[];
  ref_cnt_t rc;

  initial begin
    logic [31:0] rd;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_arvalid = 0; s_axil_bready = 1; s_axil_rready = 1;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    st0 = new[C * L]; w = new[C]; xs = new[NUM_EX * F]; ys = new[NUM_EX];
    // examples
    foreach (xs[i]) xs[i] = ($urandom % 3) != 0;
    foreach (ys[i]) ys[i] = ($urandom % 2);
    ys[0] = 1; ys[1] = 0;
    // weights: clause 5 weight >= T (never updated when Y=1,o=1), 2 and 6 negative
    w = '{5, 30, -3, 0, 12, 40, -8};
    // states: clauses 0,1,5 start fully excluded near N (clause output 1),
    // the others random; a few saturated values
    for (int c = 0; c < C; c++)
      for (int l = 0; l < L; l++)
        st0[c*L + l] = (c == 0 || c == 1 || c == 5) ? byte'(100 + $urandom % 28) : byte'($urandom % 256);
    st0[0*L + 3] = 255; st0[3*L + 5] = 0; st0[3*L + 6] = 0; st0[4*L + 7] = 0;
    for (int i = 0; i < (1 << 13); i++) mem.mem[i] = '0;
    for (int e = 0; e < NUM_EX; e++) begin
      logic [DATA_W-1:0] bt;
      mem.mem[DATA_BASE/BYTES + e*REC] = DATA_W'(ys[e]);
      for (int k = 0; k < XB; k++) begin
        bt = '0;
        for (int b = 0; b < DATA_W; b++) if (k*DATA_W + b < F) bt[b] = xs[e*F + k*DATA_W + b];
        mem.mem[DATA_BASE/BYTES + e*REC + 1 + k] = bt;
      end
    end
    for (int c = 0; c < C; c++) mem.mem[WEIGHT_BASE/BYTES + c/4][(c%4)*32 +: 32] = w[c];
    // state layout: group g (first clause g*NE), beat (wd*A + e)
    for (int g0 = 0; g0 < C; g0 += NE) begin
      int A; A = (C - g0 < NE) ? C - g0 : NE;
      for (int wd = 0; wd < LW; wd++)
        for (int e = 0; e < A; e++)
          for (int i = 0; i < LANES; i++)
            mem.mem[STATE_BASE/BYTES + g0*LW + wd*A + e][i*8 +: 8] = st0[(g0+e)*L + wd*LANES + i];
    end
    stref = st0;
    ref_train(F, NE, C, LANES, NUM_EX, EPOCHS, T, S_INV, SEED, stref, w, xs, ys, rc);

    repeat (5) @(posedge clk);
    rst_n = 1;
    axil_write(REG_DATA_BASE, DATA_BASE);
    axil_write(REG_STATE_BASE, STATE_BASE);
    axil_write(REG_WEIGHT_BASE, WEIGHT_BASE);
    axil_write(REG_RESULT_BASE, RESULT_BASE);
    axil_write(REG_NUM_EX, NUM_EX);
    axil_write(REG_BATCH, MAXB);
    axil_write(REG_CLAUSES, C);
    axil_write(REG_T, T);
    axil_write(REG_S_INV, S_INV);
    axil_write(REG_EPOCHS, EPOCHS);
    axil_write(REG_SEED, SEED);
    axil_read(REG_T, rd);       check(rd == T, "T register readback");
    axil_write(REG_CTRL, 32'h1);
    axil_read(REG_STATUS, rd);  check(rd[0] == 1'b1, "busy after start");
    do axil_read(REG_STATUS, rd); while (rd[1] == 1'b0);
    check(rd == 32'h2, "STATUS = done, not busy");

    // automaton states
    begin
      int bad;
      for (int c = 0; c < C; c++) begin
        int g0, e, A;
        g0 = (c / NE) * NE; e = c % NE; A = (C - g0 < NE) ? C - g0 : NE;
        bad = 0;
        for (int l = 0; l < L; l++) begin
          byte unsigned v;
          v = mem.mem[STATE_BASE/BYTES + g0*LW + (l/LANES)*A + e][(l%LANES)*8 +: 8];
          if (v != stref[c*L + l]) begin
            if (bad < 3) $display("  clause %0d literal %0d: got %0d expected %0d", c, l, v, stref[c*L + l]);
            bad++;
          end
        end
        check(bad == 0, $sformatf("states of clause %0d match the reference (%0d differ)", c, bad));
      end
    end
    // counters and result record
    axil_read(REG_EX_DONE, rd); check(rd == NUM_EX * EPOCHS, "examples_done register");
    axil_read(REG_UPDATES, rd); check(rd == rc.updates, $sformatf("clause_updates %0d vs %0d", rd, rc.updates));
    axil_read(REG_SKIPPED, rd); check(rd == rc.skipped, $sformatf("passes_skipped %0d vs %0d", rd, rc.skipped));
    check(mem.mem[RESULT_BASE/BYTES][31:0] == RESULT_MAGIC, "result magic");
    check(mem.mem[RESULT_BASE/BYTES][63:32] == NUM_EX * EPOCHS, "result examples");
    check(mem.mem[RESULT_BASE/BYTES][95:64] == rc.updates, "result clause updates");
    check(mem.mem[RESULT_BASE/BYTES][127:96] == rc.skipped, "result skipped passes");
    // throughput bound: at most one state beat per cycle
    axil_read(REG_CYCLES, rd);
    check(n_beats == (C * LW) * NUM_EX * EPOCHS + n_upd_beats, "state beats streamed through the core");
    check(rd >= n_beats, "cycles >= state beats (at most one beat per cycle)");
    $display("cycles=%0d eval=%0d upd=%0d skipped=%0d ia=%0d ib=%0d ii=%0d negblk=%0d sat_hi=%0d sat_lo=%0d stall=%0d batches=%0d split4k=%0d memstall=%0d",
             rd, n_eval, n_upd, rc.skipped, rc.ia, rc.ib, rc.ii, rc.neg_blocked, rc.sat_hi, rc.sat_lo,
             n_core_stall, n_batches, n_split4k, mem.stall_cycles);
    check(n_eval == rc.eval_passes, "evaluation passes issued");
    check(n_upd == rc.update_passes, "update passes issued");
    check(mem.errors == 0, "AXI protocol errors in memory model");
    // every mechanism happened
    check(n_eval > 0, "mechanism: evaluation pass");
    check(n_upd > 0, "mechanism: update pass");
    check(rc.skipped > 0, "mechanism: update pass bypassed");
    check(rc.ia > 0, "mechanism: Type Ia feedback");
    check(rc.ib > 0, "mechanism: Type Ib feedback");
    check(rc.ii > 0, "mechanism: Type II feedback");
    check(rc.neg_blocked > 0, "mechanism: update blocked by negative weight");
    check(rc.sat_hi + rc.sat_lo > 0, "mechanism: state saturation");
    check(n_batches > EPOCHS, "mechanism: several batches per epoch");
    check(n_core_stall + mem.stall_cycles > 0, "mechanism: memory back-pressure");
    check(n_split4k > 0, "mechanism: burst split at 4 KB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
