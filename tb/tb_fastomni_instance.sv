// tb_fastomni_instance: checks one engine's clause context. Each round clears
// the instance, feeds a random number of beat violation flags, then decides;
// clause_out must be the inverse of the OR of the flags (0 when inactive) and
// fb the feedback type given by the update rule for that output, weight,
// label, T and random number. fb must hold until the next clear.
`timescale 1ns/1ps
module tb_fastomni_instance;
  import tmae_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, acc_en, acc_violation, decide, active, y, clause_out;
  logic signed [31:0] weight;
  logic [15:0] t_thresh;
  logic [31:0] rand_u;
  fb_e fb;
  int checks = 0, failures = 0;

  fastomni_instance #(.T_W(16), .W_W(32)) dut (.clk, .rst_n, .clear, .acc_en, .acc_violation, .decide,
    .active, .y, .weight, .t_thresh, .rand_u, .clause_out, .fb);

  function automatic fb_e expect_fb(bit o, int w, bit yy, int unsigned t, int unsigned u);
    longint r, num, pick, tl;
    tl = longint'(t);
    r = o ? longint'(w) : 0;
    if (r > tl) r = tl;
    if (r < -tl) r = -tl;
    num  = yy ? tl - r : tl + r;
    pick = (longint'(u) * (2 * tl)) >>> 32;
    if (!(pick < num) || w < 0) return FB_NONE;
    return yy ? (o ? FB_IA : FB_IB) : (o ? FB_II : FB_NONE);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; acc_en = 0; acc_violation = 0; decide = 0; active = 1; y = 0; weight = 0; t_thresh = 100; rand_u = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      bit v_exp, o_exp;
      fb_e f_exp;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      v_exp = 0;
      for (int k = 0; k < int'($urandom % 6); k++) begin
        acc_en = ($urandom % 4) != 0;
        acc_violation = ($urandom % 5) == 0;
        if (acc_en && acc_violation) v_exp = 1;
        @(negedge clk);
      end
      acc_en = 0; acc_violation = 0;
      active = ($urandom % 6) != 0;
      y = $urandom % 2;
      weight = int'($urandom % 301) - 100;
      t_thresh = 16'(1 + $urandom % 200);
      rand_u = $urandom;
      o_exp = active && !v_exp;
      f_exp = active ? expect_fb(o_exp, weight, y, t_thresh, rand_u) : FB_NONE;
      decide = 1;
      @(negedge clk); decide = 0;
      rand_u = $urandom;   // later random numbers must not change the decision
      @(negedge clk);
      checks++;
      if (clause_out !== o_exp || fb !== f_exp) begin
        failures++;
        if (failures < 5) $display("FAIL n=%0d o=%0d/%0d fb=%0d/%0d", n, clause_out, o_exp, fb, f_exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
