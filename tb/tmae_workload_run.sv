// tmae_workload_run: one accelerator, its external memory and a host model,
// running a training job of the embedding workload and checking the outcome.
//
// Testbench use only. The accelerator has NE engines and otherwise its default
// size: 40,000 features, 32 clauses, 8-bit states, 128-bit memory port. The
// job trains one target token with T = 20000 and s = 1.0 on NUM_EX examples
// for EPOCHS epochs, in batches of 8. The examples imitate the word-context
// inputs of the embedding task: X is the bag of words of 24 accumulated
// documents of 12 words each, drawn from the 40,000-word vocabulary, and for
// label 1 each document also contains one of a few context words of the
// target. All data comes from a xorshift32 stream started at DATA_SEED, so two
// instances with the same DATA_SEED train on the same data. Automata start at
// N or N+1 (127/128), weights are small positive integers with a few negative.
//
// After `done` the host reads the counters; then every automaton state, the
// counters and the result record are compared with the reference model of the
// training rule (tmae_tb_pkg), and the run's cycle count is reported. Outputs:
// finished (level), checks, failures, cycles (accelerator CYCLES register),
// updates and skipped (clause updates and bypassed update passes).
`timescale 1ns/1ps
module tmae_workload_run #(
  parameter int unsigned NE        = 12,
  parameter int unsigned NUM_EX    = 8,
  parameter int unsigned EPOCHS    = 2,
  parameter int unsigned DATA_SEED = 32'h0000_0041
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        finished,
  output int          checks,
  output int          failures,
  output int unsigned cycles,
  output int unsigned updates,
  output int unsigned skipped
);
  import tmae_pkg::*;
  import tmae_tb_pkg::*;

  localparam int unsigned F = 40000, C = 32, DATA_W = 128, ADDR_W = 32, BATCH = 8;
  localparam int unsigned LANES = DATA_W / 8, L = 2 * F, LW = L / LANES;
  localparam int unsigned XB = (F + DATA_W - 1) / DATA_W, REC = XB + 1;
  localparam int unsigned T = 20000, S_INV = 65536, SEED = 32'd42;
  localparam int unsigned DOCS = 24, WORDS = 12, CONTEXT = 6;
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned RESULT_BASE = 32'h0000_0100, WEIGHT_BASE = 32'h0000_1000,
                          DATA_BASE = 32'h0000_2000, STATE_BASE = 32'h0010_0000;

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

  tmae_accel_top #(.NUM_ENGINES(NE)) dut (
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

  axi_mem_model #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .DEPTH(1 << 18), .STALL_PCT(0)) mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (%0d engines): %s", NE, what); end
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

  // deterministic data stream
  logic [31:0] ds;
  function automatic int unsigned next_rand();
    ds = xorshift32(ds);
    return ds;
  endfunction

  byte unsigned st0[], stref[];
  int  w[];
  bit  xs[], ys[];
  int unsigned ctx[CONTEXT];
  ref_cnt_t rc;

  initial begin
    logic [31:0] rd;
    finished = 0; checks = 0; failures = 0; cycles = 0; updates = 0; skipped = 0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_arvalid = 0; s_axil_bready = 1; s_axil_rready = 1;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    ds = DATA_SEED;
    st0 = new[C * L]; w = new[C]; xs = new[NUM_EX * F]; ys = new[NUM_EX];
    foreach (ctx[i]) ctx[i] = next_rand() % F;
    // examples: label sampled with probability 1/2, X = 24 accumulated documents
    for (int e = 0; e < NUM_EX; e++) begin
      ys[e] = next_rand() % 2;
      for (int d = 0; d < DOCS; d++) begin
        for (int k = 0; k < WORDS; k++) xs[e*F + next_rand() % F] = 1;
        if (ys[e]) xs[e*F + ctx[next_rand() % CONTEXT]] = 1;
      end
    end
    foreach (w[i]) w[i] = (i % 11 == 10) ? -int'(1 + next_rand() % 4) : int'(1 + next_rand() % 8);
    foreach (st0[i]) st0[i] = byte'(127 + next_rand() % 2);
    for (int i = 0; i < (1 << 18); i++) mem.mem[i] = '0;
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
    for (int g0 = 0; g0 < C; g0 += NE) begin
      int A; A = (C - g0 < NE) ? C - g0 : NE;
      for (int wd = 0; wd < LW; wd++)
        for (int e = 0; e < A; e++)
          for (int i = 0; i < LANES; i++)
            mem.mem[STATE_BASE/BYTES + g0*LW + wd*A + e][i*8 +: 8] = st0[(g0+e)*L + wd*LANES + i];
    end
    stref = st0;
    ref_train(F, NE, C, LANES, NUM_EX, EPOCHS, T, S_INV, SEED, stref, w, xs, ys, rc);

    wait (rst_n);
    repeat (2) @(posedge clk);
    axil_write(REG_DATA_BASE, DATA_BASE);
    axil_write(REG_STATE_BASE, STATE_BASE);
    axil_write(REG_WEIGHT_BASE, WEIGHT_BASE);
    axil_write(REG_RESULT_BASE, RESULT_BASE);
    axil_write(REG_NUM_EX, NUM_EX);
    axil_write(REG_BATCH, BATCH);
    axil_write(REG_CLAUSES, C);
    axil_write(REG_T, T);
    axil_write(REG_S_INV, S_INV);
    axil_write(REG_EPOCHS, EPOCHS);
    axil_write(REG_SEED, SEED);
    axil_write(REG_CTRL, 32'h1);
    while (!done) @(negedge clk);
    axil_read(REG_STATUS, rd);  check(rd == 32'h2, "STATUS = done, not busy");
    axil_read(REG_CYCLES, rd);  cycles = rd;
    axil_read(REG_UPDATES, rd); updates = rd; check(rd == rc.updates, $sformatf("clause updates %0d vs %0d", rd, rc.updates));
    axil_read(REG_SKIPPED, rd); skipped = rd; check(rd == rc.skipped, $sformatf("skipped passes %0d vs %0d", rd, rc.skipped));
    axil_read(REG_EX_DONE, rd); check(rd == NUM_EX * EPOCHS, "examples trained");
    check(mem.mem[RESULT_BASE/BYTES] == {rc.skipped, rc.updates, NUM_EX * EPOCHS, RESULT_MAGIC}, "result record");
    check(mem.errors == 0, "AXI protocol errors in memory model");
    for (int c = 0; c < C; c++) begin
      int g0, e, A, bad;
      g0 = (c / NE) * NE; e = c % NE; A = (C - g0 < NE) ? C - g0 : NE;
      bad = 0;
      for (int l = 0; l < L; l++)
        if (mem.mem[STATE_BASE/BYTES + g0*LW + (l/LANES)*A + e][(l%LANES)*8 +: 8] != stref[c*L + l]) bad++;
      check(bad == 0, $sformatf("states of clause %0d match the reference (%0d differ)", c, bad));
    end
    $display("%0d engines: %0d examples x %0d epochs, cycles=%0d (%0d per example), updates=%0d (Ia %0d, Ib %0d, II %0d, blocked by w<0 %0d), skipped passes=%0d",
             NE, NUM_EX, EPOCHS, cycles, cycles / (NUM_EX * EPOCHS), rc.updates, rc.ia, rc.ib, rc.ii,
             rc.neg_blocked, rc.skipped);
    finished = 1;
  end
endmodule
