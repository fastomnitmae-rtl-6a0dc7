// state_update_logic: applies one clause's feedback to a beat of automaton states.
//
// Per lane (one literal): include = state > N (MSB), step probabilities use a
// 16-bit random number per lane compared with 1/s in Q16 (65536 = 1.0).
//   FB_IA: literal 1 -> increment; literal 0 -> decrement with probability 1/s
//   FB_IB: decrement with probability 1/s
//   FB_II: literal 0 and excluded -> increment
//   FB_NONE: unchanged
// Increments saturate at 2^STATE_BITS-1, decrements at 0. Combinational.
// Follows the paper: the three feedback types and the role of s. Own choices:
// the true-literal increment of Type Ia is unconditional (the paper names no
// probability for it), and the Q16 form of 1/s.
module state_update_logic
  import tmae_pkg::*;
#(
  parameter int unsigned LANES      = 16,
  parameter int unsigned STATE_BITS = 8
) (
  input  logic [LANES*STATE_BITS-1:0] states_in,
  input  logic [LANES-1:0]            literals,
  input  fb_e                         fb,
  input  logic [16:0]                 s_inv,      // 1/s, Q16
  input  logic [LANES*16-1:0]         rand_lanes, // 16 random bits per lane
  output logic [LANES*STATE_BITS-1:0] states_out
);
  localparam logic [STATE_BITS-1:0] SMAX = '1;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [STATE_BITS-1:0] st;
      logic                  inc, dec, lit, incl, forget;
      st     = states_in[i*STATE_BITS +: STATE_BITS];
      lit    = literals[i];
      incl   = st[STATE_BITS-1];
      forget = ({1'b0, rand_lanes[i*16 +: 16]} < s_inv);
      inc    = 1'b0;
      dec    = 1'b0;
      unique case (fb)
        FB_IA: begin
          inc = lit;
          dec = !lit && forget;
        end
        FB_IB:   dec = forget;
        FB_II:   inc = !lit && !incl;
        default: ;
      endcase
      if (inc && st != SMAX)       st = st + 1'b1;
      else if (dec && st != '0)    st = st - 1'b1;
      states_out[i*STATE_BITS +: STATE_BITS] = st;
    end
  end
endmodule
