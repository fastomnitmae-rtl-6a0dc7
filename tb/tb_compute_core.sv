// tb_compute_core: plays the controller and the data mover around the compute
// core (4 engines, 32 features, 7 clauses in groups of 4 and 3, 3 examples).
// Beats are offered with random gaps and the output is accepted with random
// back-pressure; an X-buffer model answers with one cycle of latency. After
// each evaluation pass the clause outputs are checked against a direct
// evaluation; after the run every state is compared with the reference model
// (same random streams). A last gap-free update pass checks the rate: N beats
// in N + 2 cycles.
`timescale 1ns/1ps
module tb_compute_core;
  import tmae_pkg::*;
  import tmae_tb_pkg::*;
  localparam int unsigned NE = 4, F = 32, DW = 128, LANES = 16, L = 2 * F, LW = L / LANES;
  localparam int unsigned XBW = 4, C = 7, NEX = 3, T = 50, S_INV = 40000, SEED = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic seed_load, pass_start, mode_update, y, decide, any_update, idle;
  logic [2:0] grp_active, num_updates;
  logic [XBW-1:0] ex_xbase, x_rd_addr;
  logic signed [31:0] grp_weight [NE];
  logic [NE-1:0] clause_out;
  logic s_valid, s_ready, m_valid, m_ready, x_rd_en;
  logic [DW-1:0] s_data, m_data, x_rd_data;
  logic [DW-1:0] xmem [16];

  compute_core #(.NUM_ENGINES(NE), .FEATURES(F), .STATE_BITS(8), .DATA_W(DW), .XB_AW(XBW)) dut (
    .clk, .rst_n, .seed(SEED), .seed_load, .t_thresh(16'(T)), .s_inv(17'(S_INV)),
    .pass_start, .mode_update, .grp_active, .ex_xbase, .y, .decide, .grp_weight,
    .any_update, .num_updates, .clause_out, .idle,
    .s_valid, .s_data, .s_ready, .m_valid, .m_data, .m_ready, .x_rd_en, .x_rd_addr, .x_rd_data);

  always_ff @(posedge clk) if (x_rd_en) x_rd_data <= xmem[x_rd_addr];

  int checks = 0, failures = 0;
  byte unsigned st[], stref[];
  int w[];
  bit xs[], ys[];
  ref_cnt_t rc;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream the beats of group g0 (A clauses) through the core
  task automatic run_pass(input int g0, input int A, input bit upd, input bit gaps, output int cycles);
    int sent, got, total;
    logic [DW-1:0] beat;
    total = A * LW; sent = 0; got = 0; cycles = 0;
    @(negedge clk);
    pass_start = 1; mode_update = upd; grp_active = 3'(A);
    @(negedge clk);
    pass_start = 0;
    while (sent < total || (upd && got < total) || !idle) begin
      int wd, e;
      wd = sent / A; e = sent % A;
      for (int i = 0; i < LANES; i++) beat[i*8 +: 8] = (sent < total) ? st[(g0+e)*L + wd*LANES + i] : 8'd0;
      s_valid = (sent < total) && (!gaps || ($urandom % 3) != 0);
      s_data  = beat;
      m_ready = !gaps || ($urandom % 3) != 0;
      @(posedge clk);
      cycles++;
      if (s_valid && s_ready) sent++;
      if (m_valid && m_ready) begin
        int gw, ge;
        gw = got / A; ge = got % A;
        for (int i = 0; i < LANES; i++) st[(g0+ge)*L + gw*LANES + i] = m_data[i*8 +: 8];
        got++;
      end
      #1;
    end
    s_valid = 0;
    if (!upd) check(got == 0, "no output during an evaluation pass");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    seed_load = 0; pass_start = 0; mode_update = 0; y = 0; decide = 0; grp_active = 1; ex_xbase = 0;
    s_valid = 0; s_data = 0; m_ready = 1;
    foreach (grp_weight[e]) grp_weight[e] = 0;
    st = new[C * L]; w = new[C]; xs = new[NEX * F]; ys = new[NEX];
    w = '{3, 60, 0, -2, 10, 7, 1};
    foreach (st[i]) st[i] = ((i / L) % 3 == 0) ? byte'(110 + $urandom % 18) : byte'($urandom % 256);
    foreach (xs[i]) xs[i] = $urandom % 2;
    ys = '{1, 0, 1};
    for (int e = 0; e < NEX; e++) begin
      xmem[e] = '0;
      for (int f = 0; f < F; f++) xmem[e][f] = xs[e*F + f];
    end
    stref = st;
    ref_train(F, NE, C, LANES, NEX, 1, T, S_INV, SEED, stref, w, xs, ys, rc);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); seed_load = 1; @(negedge clk); seed_load = 0;
    for (int ex = 0; ex < NEX; ex++) begin
      ex_xbase = XBW'(ex);
      y = ys[ex];
      for (int g0 = 0; g0 < C; g0 += NE) begin
        int A;
        bit o_exp [NE];
        A = (C - g0 < NE) ? C - g0 : NE;
        for (int e = 0; e < NE; e++) grp_weight[e] = (g0 + e < C) ? w[g0 + e] : 0;
        // expected clause outputs from the current states
        for (int e = 0; e < A; e++) begin
          o_exp[e] = 1;
          for (int l = 0; l < L; l++)
            if (st[(g0+e)*L + l] > 127 && !((l < F) ? xs[ex*F + l] : !xs[ex*F + l - F])) o_exp[e] = 0;
        end
        run_pass(g0, A, 0, 1, cyc);
        @(negedge clk); decide = 1; @(negedge clk); decide = 0; @(negedge clk);
        for (int e = 0; e < A; e++) check(clause_out[e] == o_exp[e], $sformatf("clause output ex %0d clause %0d", ex, g0 + e));
        if (any_update) run_pass(g0, A, 1, 1, cyc);
      end
    end
    foreach (st[i]) begin
      checks++;
      if (st[i] != stref[i]) begin
        failures++;
        if (failures < 5) $display("FAIL state %0d: %0d expected %0d", i, st[i], stref[i]);
      end
    end
    check(rc.updates > 0 && rc.skipped > 0, "both update and skipped passes occurred");
    // rate: a gap-free update pass (force Type Ib on all clauses of group 0)
    y = 1;
    foreach (grp_weight[e]) grp_weight[e] = 0;
    ex_xbase = 0;
    begin
      int tries;
      tries = 0;
      do begin
        run_pass(0, NE, 0, 0, cyc);
        @(negedge clk); decide = 1; @(negedge clk); decide = 0; @(negedge clk);
        tries++;
      end while (!any_update && tries < 20);
      run_pass(0, NE, 1, 0, cyc);
      check(cyc == NE * LW + 2, $sformatf("update pass of %0d beats took %0d cycles", NE * LW, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
