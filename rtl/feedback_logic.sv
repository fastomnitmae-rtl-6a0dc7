// feedback_logic: local update decision of one clause (FastOmniTMAE rule).
//
// Given the clause output o, its weight w, the example label y, the threshold T
// and a 32-bit uniform random number u, it computes
//   r = clip(w*o, -T, T),  p = (T - r)/2T for y=1,  p = (T + r)/2T for y=0
// and samples the update as floor(u * 2T / 2^32) < (T -/+ r), i.e. with
// probability p. A sampled clause with w >= 0 receives Type Ia (y=1, o=1),
// Type Ib (y=1, o=0) or Type II (y=0, o=1) feedback; otherwise FB_NONE.
// Combinational; one multiplier. The formulas follow the paper's Algorithm 1;
// the fixed-point sampling is this design's own.
module feedback_logic
  import tmae_pkg::*;
#(
  parameter int unsigned T_W = 16,
  parameter int unsigned W_W = 32
) (
  input  logic                  o,
  input  logic signed [W_W-1:0] weight,
  input  logic                  y,
  input  logic [T_W-1:0]        t_thresh,
  input  logic [31:0]           rand_u,
  output logic [T_W+1:0]        numer,    // T -/+ r, 0..2T
  output logic                  sampled,
  output fb_e                   fb
);
  logic signed [W_W:0]   t_s, r_full;
  logic signed [T_W+1:0] r;
  logic [T_W:0]          two_t;
  logic [T_W+32:0]       prod;

  always_comb begin
    t_s    = {{(W_W+1-T_W){1'b0}}, t_thresh};
    r_full = o ? {weight[W_W-1], weight} : '0;
    if (r_full > t_s)        r_full = t_s;
    else if (r_full < -t_s)  r_full = -t_s;
    r      = r_full[T_W+1:0];
    numer  = y ? ({2'b00, t_thresh} - r) : ({2'b00, t_thresh} + r);
    two_t  = {t_thresh, 1'b0};
    prod   = rand_u * two_t;
    sampled = ({1'b0, prod[T_W+32:32]} < numer);
    if (!sampled || weight[W_W-1])  fb = FB_NONE;
    else if (y)                     fb = o ? FB_IA : FB_IB;
    else                            fb = o ? FB_II : FB_NONE;
  end
endmodule
