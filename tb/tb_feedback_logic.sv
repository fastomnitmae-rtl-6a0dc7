// tb_feedback_logic: checks the local update decision of feedback_logic.
// Expected values are computed with 64-bit integer arithmetic from the
// training rule: r = clip(w*o, -T, T), numerator T-r (y=1) or T+r (y=0),
// update when floor(u*2T/2^32) < numerator and w >= 0, then the feedback type
// from (y, o). Random and directed cases (p = 0, p = 1, negative weights).
`timescale 1ns/1ps
module tb_feedback_logic;
  import tmae_pkg::*;
  logic o, y, sampled;
  logic signed [31:0] weight;
  logic [15:0] t_thresh;
  logic [31:0] rand_u;
  logic [17:0] numer;
  fb_e fb;
  int checks = 0, failures = 0;
  int n_ia = 0, n_ib = 0, n_ii = 0;

  feedback_logic #(.T_W(16), .W_W(32)) dut (.o, .weight, .y, .t_thresh, .rand_u, .numer, .sampled, .fb);

  task automatic apply(input bit oo, input int w, input bit yy, input int unsigned t, input int unsigned u);
    longint r, num, pick, tl;
    fb_e e;
    o = oo; weight = w; y = yy; t_thresh = 16'(t); rand_u = u;
    #1;
    tl = longint'(t);
    r = oo ? longint'(w) : 0;
    if (r > tl) r = tl;
    if (r < -tl) r = -tl;
    num  = yy ? tl - r : tl + r;
    pick = (longint'(u) * (2 * tl)) >>> 32;
    e = FB_NONE;
    if (pick < num && w >= 0) e = yy ? (oo ? FB_IA : FB_IB) : (oo ? FB_II : FB_NONE);
    checks++;
    if (numer !== 18'(num) || fb !== e || sampled !== (pick < num)) begin
      failures++;
      if (failures < 5) $display("FAIL o=%0d w=%0d y=%0d T=%0d u=%h: numer=%0d/%0d fb=%0d/%0d", oo, w, yy, t, u, numer, num, fb, e);
    end
    case (fb) FB_IA: n_ia++; FB_IB: n_ib++; FB_II: n_ii++; default: ; endcase
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int w;
      int unsigned t;
      t = 1 + ($urandom % 30000);
      case (n % 4)
        0: w = int'($urandom % 60001) - 30000;
        1: w = int'($urandom % 41) - 20;
        2: w = int'(t) + int'($urandom % 100);
        default: w = -int'(t) - int'($urandom % 100);
      endcase
      apply($urandom % 2, w, $urandom % 2, t, $urandom);
    end
    // directed: y=1, o=1, w >= T -> p = 0, never updates
    apply(1, 20000, 1, 20000, 32'hFFFF_FFFF);
    checks++; if (fb !== FB_NONE) failures++;
    // y=0, o=1, w >= T -> p = 1, always Type II
    apply(1, 25000, 0, 20000, 32'hFFFF_FFFF);
    checks++; if (fb !== FB_II) failures++;
    // negative weight never updates
    apply(1, -5, 1, 20000, 0);
    checks++; if (fb !== FB_NONE) failures++;
    // y=1, o=0: p = 1/2
    apply(0, 7, 1, 100, 32'h7FFF_FFFF); checks++; if (fb !== FB_IB) failures++;
    apply(0, 7, 1, 100, 32'h8000_0000); checks++; if (fb !== FB_NONE) failures++;
    checks++; if (n_ia == 0 || n_ib == 0 || n_ii == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
