// tb_tmae_workload: the word-embedding training job on the two published
// accelerator sizes, side by side.
//
// Two instances of tmae_workload_run train the same target token on the same
// data: one accelerator with 12 engines (the larger board's build) and one
// with 2 engines (the smaller board's build), both at the full model size of
// 40,000 features and 32 clauses with T = 20000 and s = 1.0. One batch of 8
// examples is trained for 2 epochs, as far as a simulation can go of the
// 8,000 examples per token of the real job. Each instance checks all
// 2,560,000 automaton states, the counters and the result record against the
// reference model. This testbench checks that both finished and passed, that
// clause updates and bypassed update passes both occurred, and that each run
// stays within 5% of the streaming rate of one 16-state beat per cycle (two
// passes over 160,000 beats per example at most), and it prints the cycles
// per example and what they mean for the full job of 352,000 examples at the
// clock rates of the two builds (150 MHz and 75 MHz).
`timescale 1ns/1ps
module tb_tmae_workload;
  localparam int unsigned NUM_EX = 8, EPOCHS = 2;
  localparam longint unsigned BEATS_PER_PASS = 160000, JOB_EXAMPLES = 352000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        fin_a, fin_b;
  int          chk_a, chk_b, fail_a, fail_b;
  int unsigned cyc_a, cyc_b, upd_a, upd_b, skp_a, skp_b;

  tmae_workload_run #(.NE(12), .NUM_EX(NUM_EX), .EPOCHS(EPOCHS)) run12 (
    .clk, .rst_n, .finished(fin_a), .checks(chk_a), .failures(fail_a), .cycles(cyc_a),
    .updates(upd_a), .skipped(skp_a));
  tmae_workload_run #(.NE(2), .NUM_EX(NUM_EX), .EPOCHS(EPOCHS)) run2 (
    .clk, .rst_n, .finished(fin_b), .checks(chk_b), .failures(fail_b), .cycles(cyc_b),
    .updates(upd_b), .skipped(skp_b));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk_a + chk_b, failures + fail_a + fail_b);
    $finish;
  end

  initial begin
    longint unsigned per_a, per_b, bound;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (fin_a && fin_b);
    per_a = cyc_a / (NUM_EX * EPOCHS);
    per_b = cyc_b / (NUM_EX * EPOCHS);
    bound = 2 * BEATS_PER_PASS + 2 * BEATS_PER_PASS / 20;
    check(chk_a > 30 && chk_b > 30, "both runs made their checks");
    check(upd_a > 0 && upd_b > 0, "clause updates happened");
    check(skp_a + skp_b > 0, "a bypassed update pass happened");
    check(per_a <= bound, $sformatf("12 engines: %0d cycles per example within the streaming bound %0d", per_a, bound));
    check(per_b <= bound, $sformatf("2 engines: %0d cycles per example within the streaming bound %0d", per_b, bound));
    check(per_a >= BEATS_PER_PASS && per_b >= BEATS_PER_PASS, "every example streams the states at least once");
    $display("job of %0d examples: 12 engines at 150 MHz %0d s, 2 engines at 75 MHz %0d s",
             JOB_EXAMPLES, JOB_EXAMPLES * per_a / 150000000, JOB_EXAMPLES * per_b / 75000000);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk_a + chk_b, failures + fail_a + fail_b);
    $finish;
  end
endmodule
