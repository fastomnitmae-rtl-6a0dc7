// fastomni_instance: one FastOmniTMAE engine, i.e. the context of one clause.
//
// During the evaluation pass the compute core forwards to this instance the
// violation flag of every beat that belongs to its clause; the instance ORs them.
// At `decide` it forms the clause output o = !violation (0 when the instance has
// no clause in this group), and its own feedback_logic computes the local update
// probability from o, the clause weight, the label and T, samples it with the
// instance's random number and registers the feedback type. The feedback type
// is then held for the whole update pass. `clear` (start of an evaluation pass)
// resets the accumulator and the feedback. One cycle per operation.
// Follows the paper: local, per-clause decision (no class sum). Own choice: the
// split of work between instance and shared logic.
module fastomni_instance
  import tmae_pkg::*;
#(
  parameter int unsigned T_W = 16,
  parameter int unsigned W_W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  acc_en,
  input  logic                  acc_violation,
  input  logic                  decide,
  input  logic                  active,    // a clause is mapped to this engine
  input  logic                  y,
  input  logic signed [W_W-1:0] weight,
  input  logic [T_W-1:0]        t_thresh,
  input  logic [31:0]           rand_u,
  output logic                  clause_out,
  output fb_e                   fb
);
  logic violation;
  logic o_now, sampled;
  logic [T_W+1:0] numer;
  fb_e  fb_now;

  assign o_now = active && !violation;

  feedback_logic #(.T_W(T_W), .W_W(W_W)) u_fb (
    .o(o_now), .weight(weight), .y(y), .t_thresh(t_thresh), .rand_u(rand_u),
    .numer(numer), .sampled(sampled), .fb(fb_now)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      violation  <= 1'b0;
      clause_out <= 1'b0;
      fb         <= FB_NONE;
    end else if (clear) begin
      violation  <= 1'b0;
      clause_out <= 1'b0;
      fb         <= FB_NONE;
    end else if (decide) begin
      clause_out <= o_now;
      fb         <= active ? fb_now : FB_NONE;
    end else if (acc_en) begin
      violation  <= violation | acc_violation;
    end
  end
endmodule
