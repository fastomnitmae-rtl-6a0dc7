// tb_global_control_fsm: drives the controller with a stand-in data mover
// (busy for a random number of cycles per command) and a stand-in compute core
// whose update decision follows a random pattern. 30 clauses in groups of 12,
// 12 and 6, 5 examples in batches of 2, 2 and 1, 2 epochs. The command stream
// (operation, address, beat count), the group sizes and X-buffer offsets given
// to the core, the label pops, the skipped update passes, the counters, and
// the final done flag are compared with a list built from the run's loops.
`timescale 1ns/1ps
module tb_global_control_fsm;
  import tmae_pkg::*;
  localparam int unsigned NE = 12, MAXC = 32, F = 40000, DW = 128, BY = DW / 8;
  localparam int unsigned LW = 2 * F / (DW / 8), XB = (F + DW - 1) / DW, REC = XB + 1;
  localparam int unsigned C = 30, NEX = 5, BATCH = 2, EP = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  stat_t stat;
  logic start_pulse, clear_pulse, dm_start, dm_busy, seed_load, pass_start, mode_update, decide, any_update, lbl_pop;
  dm_cmd_t dm_cmd;
  logic [DW-1:0] result_data;
  logic [3:0] grp_active, num_updates;
  logic [5:0] grp_base;
  logic [11:0] ex_xbase;

  global_control_fsm #(.NUM_ENGINES(NE), .MAX_CLAUSES(MAXC), .FEATURES(F), .DATA_W(DW), .MAX_BATCH(8), .XB_AW(12)) dut (
    .clk, .rst_n, .cfg, .start_pulse, .clear_pulse, .stat, .dm_start, .dm_cmd, .dm_busy, .result_data,
    .seed_load, .pass_start, .mode_update, .grp_active, .grp_base, .ex_xbase, .decide, .any_update,
    .num_updates, .lbl_pop);

  typedef struct { dm_op_e op; int unsigned addr, beats, active, xbase, gbase; } ev_t;
  ev_t got[$], exp_q[$];
  int busy_left = 0, n_decide = 0, n_pop = 0, n_seed = 0, n_pass = 0, n_upd_sum = 0, n_skip = 0;
  bit pattern[$];

  // stand-in data mover and core
  always @(posedge clk) begin
    if (!rst_n) busy_left <= 0;
    else if (dm_start) begin
      got.push_back('{dm_cmd.op, dm_cmd.addr, dm_cmd.beats, grp_active, ex_xbase, grp_base});
      busy_left <= 2 + $urandom % 8;
    end else if (busy_left > 0) busy_left <= busy_left - 1;
    if (rst_n && decide) begin
      bit u;
      u = pattern.size() > 0 ? pattern.pop_front() : 0;
      any_update  <= u;
      num_updates <= u ? 4'(1 + n_decide % 3) : 4'd0;
      if (u) n_upd_sum += 1 + n_decide % 3; else n_skip++;
      n_decide++;
    end
    if (rst_n && lbl_pop) n_pop++;
    if (rst_n && seed_load) n_seed++;
    if (rst_n && pass_start) n_pass++;
  end
  assign dm_busy = busy_left > 0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nd;
    cfg = '0; start_pulse = 0; clear_pulse = 0; any_update = 0; num_updates = 0;
    cfg.data_base = 32'h0010_0000; cfg.state_base = 32'h0100_0000; cfg.weight_base = 32'h0000_4000;
    cfg.result_base = 32'h0000_0040; cfg.num_examples = NEX; cfg.batch_size = BATCH; cfg.num_clauses = C;
    cfg.t_thresh = 100; cfg.s_inv = 17'h10000; cfg.epochs = EP; cfg.seed = 1;
    // expected command list and update pattern
    exp_q.push_back('{DM_LOAD_WEIGHTS, 32'h4000, (C * 32 + DW - 1) / DW, 0, 0, 0});
    nd = 0;
    for (int ep = 0; ep < EP; ep++)
      for (int e0 = 0; e0 < NEX; e0 += BATCH) begin
        int bc;
        bc = (NEX - e0 < BATCH) ? NEX - e0 : BATCH;
        exp_q.push_back('{DM_LOAD_BATCH, 32'h0010_0000 + e0 * REC * BY, bc * REC, 0, 0, 0});
        for (int b = 0; b < bc; b++)
          for (int g0 = 0; g0 < C; g0 += NE) begin
            int A;
            bit u;
            A = (C - g0 < NE) ? C - g0 : NE;
            u = (nd % 3) != 1;
            pattern.push_back(u);
            nd++;
            exp_q.push_back('{DM_EVAL, 32'h0100_0000 + g0 * LW * BY, A * LW, A, b * XB, g0});
            if (u) exp_q.push_back('{DM_UPDATE, 32'h0100_0000 + g0 * LW * BY, A * LW, A, b * XB, g0});
          end
      end
    exp_q.push_back('{DM_RESULT, 32'h40, 1, 0, 0, 0});
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start_pulse = 1; @(negedge clk); start_pulse = 0;
    check(stat.busy && !stat.done, "busy after start");
    while (!stat.done) @(negedge clk);
    check(!stat.busy, "not busy when done");
    check(got.size() == exp_q.size(), $sformatf("%0d commands, expected %0d", got.size(), exp_q.size()));
    for (int i = 0; i < got.size() && i < exp_q.size(); i++) begin
      bit ok;
      ok = got[i].op == exp_q[i].op && got[i].addr == exp_q[i].addr && got[i].beats == exp_q[i].beats;
      if (got[i].op == DM_EVAL || got[i].op == DM_UPDATE)
        ok = ok && got[i].active == exp_q[i].active && got[i].xbase == exp_q[i].xbase && got[i].gbase == exp_q[i].gbase;
      check(ok, $sformatf("command %0d: op %0d addr %h beats %0d act %0d xb %0d (exp op %0d addr %h beats %0d act %0d xb %0d)",
            i, got[i].op, got[i].addr, got[i].beats, got[i].active, got[i].xbase,
            exp_q[i].op, exp_q[i].addr, exp_q[i].beats, exp_q[i].active, exp_q[i].xbase));
    end
    check(n_seed == 1, "generators seeded once");
    check(n_pop == NEX * EP, "one label pop per example");
    check(stat.examples_done == NEX * EP, "examples counter");
    check(stat.clause_updates == n_upd_sum, "clause update counter");
    check(stat.passes_skipped == n_skip && n_skip > 0, "skipped pass counter");
    check(result_data[31:0] == RESULT_MAGIC && result_data[63:32] == NEX * EP, "result record contents");
    check(stat.cycles > 0, "cycle counter runs");
    @(negedge clk); clear_pulse = 1; @(negedge clk); clear_pulse = 0;
    check(!stat.done && stat.examples_done == 0, "clear resets done and counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
