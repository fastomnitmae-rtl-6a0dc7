// tb_clause_logic: checks inclusion (state > 127) and the violation flag of
// clause_logic against a direct per-lane computation, on random beats and on
// the threshold values 127/128.
`timescale 1ns/1ps
module tb_clause_logic;
  localparam int unsigned LANES = 16, SB = 8;
  logic [LANES*SB-1:0] states;
  logic [LANES-1:0]    literals, included;
  logic                violation;
  int checks = 0, failures = 0;

  clause_logic #(.LANES(LANES), .STATE_BITS(SB)) dut (.states, .literals, .included, .violation);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [LANES-1:0] exp_inc;
      logic exp_v;
      for (int i = 0; i < LANES; i++) begin
        int unsigned v;
        case (n % 3)
          0: v = $urandom % 256;
          1: v = 127 + ($urandom % 2);          // threshold
          default: v = ($urandom % 8 == 0) ? 200 : 50;  // sparse inclusion
        endcase
        states[i*SB +: SB] = SB'(v);
        exp_inc[i] = (v > 127);
      end
      literals = LANES'($urandom);
      if (n % 5 == 0) literals = '1;
      exp_v = 0;
      for (int i = 0; i < LANES; i++) if (exp_inc[i] && !literals[i]) exp_v = 1;
      #1;
      checks++;
      if (included !== exp_inc || violation !== exp_v) begin
        failures++;
        if (failures < 5) $display("FAIL n=%0d inc=%h exp=%h viol=%b exp=%b", n, included, exp_inc, violation, exp_v);
      end
    end
    // empty clause never violates
    states = '0; literals = '0; #1;
    checks++; if (violation !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
