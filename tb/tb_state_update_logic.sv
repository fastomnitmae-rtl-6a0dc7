// tb_state_update_logic: checks each feedback type of state_update_logic lane by
// lane against a direct computation: Type Ia increments true literals and
// decrements false ones when the lane's random number is below 1/s, Type Ib
// decrements under the same condition, Type II increments excluded false
// literals, no feedback keeps the state; saturation at 0 and 255.
`timescale 1ns/1ps
module tb_state_update_logic;
  import tmae_pkg::*;
  localparam int unsigned LANES = 16, SB = 8;
  logic [LANES*SB-1:0] states_in, states_out;
  logic [LANES-1:0]    literals;
  fb_e                 fb;
  logic [16:0]         s_inv;
  logic [LANES*16-1:0] rand_lanes;
  int checks = 0, failures = 0;

  state_update_logic #(.LANES(LANES), .STATE_BITS(SB)) dut (.states_in, .literals, .fb, .s_inv, .rand_lanes, .states_out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      fb = fb_e'(n % 4);
      for (int i = 0; i < LANES; i++) begin
        int unsigned v;
        v = (n % 7 == 0) ? ((i % 2) ? 255 : 0) : $urandom % 256;
        states_in[i*SB +: SB] = SB'(v);
        rand_lanes[i*16 +: 16] = 16'($urandom);
      end
      literals = LANES'($urandom);
      case ((n / 4) % 4)
        0: s_inv = 17'h10000;   // s = 1
        1: s_inv = 17'h08000;   // s = 2
        2: s_inv = 17'h0;       // never
        default: s_inv = 17'($urandom % 65537);
      endcase
      #1;
      for (int i = 0; i < LANES; i++) begin
        int st, exp_st;
        bit lit, forget;
        st = states_in[i*SB +: SB];
        lit = literals[i];
        forget = rand_lanes[i*16 +: 16] < s_inv;
        exp_st = st;
        case (fb)
          FB_IA: exp_st = lit ? st + 1 : (forget ? st - 1 : st);
          FB_IB: exp_st = forget ? st - 1 : st;
          FB_II: exp_st = (!lit && st < 128) ? st + 1 : st;
          default: ;
        endcase
        if (exp_st > 255) exp_st = 255;
        if (exp_st < 0) exp_st = 0;
        checks++;
        if (states_out[i*SB +: SB] !== SB'(exp_st)) begin
          failures++;
          if (failures < 5) $display("FAIL n=%0d lane=%0d fb=%0d st=%0d lit=%0d got=%0d exp=%0d", n, i, fb, st, lit, states_out[i*SB +: SB], exp_st);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
