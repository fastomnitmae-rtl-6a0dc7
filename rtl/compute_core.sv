// compute_core: evaluation and state update of one clause group.
//
// NUM_ENGINES fastomni_instance engines each hold one clause of the current group
// (A = grp_active clauses). The data mover streams the group's automaton states as
// DATA_W-bit beats of LANES = DATA_W/STATE_BITS states; beat k belongs to engine
// k mod A and to literal word k div A. Literal words 0..F/LANES-1 are the
// features x, the following F/LANES words their negations (first half original,
// second half negated).
//
// Pipeline (2 stages, stalls as a whole when the output is not accepted):
//   accept: take a beat, issue the read of its X word from the input buffer;
//   stage B: literals = X word (inverted for the negated half); the shared
//            clause_logic ORs the beat's violation into its engine (eval pass),
//            or the shared state_update_logic applies the engine's feedback and
//            the new beat goes out on m_* (update pass).
// Between the passes `decide` makes every engine take its local update decision
// in one cycle. any_update/num_updates tell the controller whether an update
// pass is needed. Latency: 2 cycles per beat, one beat per cycle throughput.
// Follows the paper: two-stage evaluate/update training of independent clauses
// on parallel engines with shared clause, feedback and state-update logic
// (block names of the paper's architecture figure). Own choices: the beat
// layout, the pipeline and the random-number generators.
module compute_core
  import tmae_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 12,
  parameter int unsigned FEATURES    = 40000,
  parameter int unsigned STATE_BITS  = 8,
  parameter int unsigned DATA_W      = 128,
  parameter int unsigned XB_AW       = 12,
  parameter int unsigned T_W         = 16,
  parameter int unsigned W_W         = 32,
  parameter int unsigned LANES       = DATA_W / STATE_BITS,
  parameter int unsigned XPB         = DATA_W / LANES,       // X words per beat
  parameter int unsigned FW          = FEATURES / LANES,     // X words per example
  parameter int unsigned EW          = $clog2(NUM_ENGINES + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic [31:0]           seed,
  input  logic                  seed_load,
  input  logic [T_W-1:0]        t_thresh,
  input  logic [16:0]           s_inv,
  // pass control
  input  logic                  pass_start,    // pulse before the first beat
  input  logic                  mode_update,   // 0 = evaluation pass, 1 = update pass
  input  logic [EW-1:0]         grp_active,    // clauses in this group, 1..NUM_ENGINES
  input  logic [XB_AW-1:0]      ex_xbase,      // first X-buffer beat of the example
  input  logic                  y,             // label of the example
  input  logic                  decide,        // pulse after the evaluation pass
  input  logic signed [W_W-1:0] grp_weight [NUM_ENGINES],
  output logic                  any_update,
  output logic [EW-1:0]         num_updates,
  output logic [NUM_ENGINES-1:0] clause_out,
  output logic                  idle,
  // state stream in
  input  logic                  s_valid,
  input  logic [DATA_W-1:0]     s_data,
  output logic                  s_ready,
  // updated state stream out
  output logic                  m_valid,
  output logic [DATA_W-1:0]     m_data,
  input  logic                  m_ready,
  // X buffer read port
  output logic                  x_rd_en,
  output logic [XB_AW-1:0]      x_rd_addr,
  input  logic [DATA_W-1:0]     x_rd_data
);
  localparam int unsigned WCW = $clog2(2*FW + 1);

  // ---------------- accept stage ----------------
  logic [EW-1:0]  cnt_eng;
  logic [WCW-1:0] cnt_word;
  logic           en, accept;
  logic           neg_now;
  logic [WCW-1:0] xw_now;

  logic           p_valid;
  logic [DATA_W-1:0] p_data;
  logic [EW-1:0]  p_eng;
  logic           p_neg;
  logic [$clog2(XPB)-1:0] p_sub;

  assign en      = !m_valid || m_ready;
  assign s_ready = en;
  assign accept  = s_valid && s_ready;
  assign neg_now = (cnt_word >= WCW'(FW));
  assign xw_now  = neg_now ? cnt_word - WCW'(FW) : cnt_word;
  assign x_rd_en   = en;
  assign x_rd_addr = ex_xbase + XB_AW'(xw_now / XPB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_eng  <= '0;
      cnt_word <= '0;
      p_valid  <= 1'b0;
      p_data   <= '0;
      p_eng    <= '0;
      p_neg    <= 1'b0;
      p_sub    <= '0;
    end else if (pass_start) begin
      cnt_eng  <= '0;
      cnt_word <= '0;
      p_valid  <= 1'b0;
    end else if (en) begin
      p_valid <= accept;
      if (accept) begin
        p_data <= s_data;
        p_eng  <= cnt_eng;
        p_neg  <= neg_now;
        p_sub  <= $bits(p_sub)'(xw_now % XPB);
        if (cnt_eng == grp_active - 1'b1) begin
          cnt_eng  <= '0;
          cnt_word <= cnt_word + 1'b1;
        end else begin
          cnt_eng <= cnt_eng + 1'b1;
        end
      end
    end
  end

  // ---------------- stage B: shared clause and state-update logic ----------------
  logic [LANES-1:0]        lits;
  logic [LANES-1:0]        included;
  logic                    violation;
  logic [DATA_W-1:0]       new_states;
  logic [LANES*16-1:0]     rand_lanes;
  logic [NUM_ENGINES*32-1:0] rand_fb;
  fb_e                     inst_fb [NUM_ENGINES];
  fb_e                     cur_fb;
  logic                    proc;

  assign lits   = x_rd_data[p_sub*LANES +: LANES] ^ {LANES{p_neg}};
  assign cur_fb = (int'(p_eng) < NUM_ENGINES) ? inst_fb[p_eng] : FB_NONE;
  assign proc   = p_valid && en;

  clause_logic #(.LANES(LANES), .STATE_BITS(STATE_BITS)) u_clause (
    .states(p_data), .literals(lits), .included(included), .violation(violation)
  );

  state_update_logic #(.LANES(LANES), .STATE_BITS(STATE_BITS)) u_update (
    .states_in(p_data), .literals(lits), .fb(cur_fb), .s_inv(s_inv),
    .rand_lanes(rand_lanes), .states_out(new_states)
  );

  // Random numbers: 16 bits per lane for state updates (advance per updated beat),
  // 32 bits per engine for the update decision (advance per decision).
  rng_xorshift #(.NGEN(LANES/2), .SEED_OFS(0)) u_rng_lanes (
    .clk(clk), .rst_n(rst_n), .load(seed_load), .seed(seed),
    .advance(proc && mode_update), .rnd(rand_lanes)
  );
  rng_xorshift #(.NGEN(NUM_ENGINES), .SEED_OFS(64)) u_rng_fb (
    .clk(clk), .rst_n(rst_n), .load(seed_load), .seed(seed),
    .advance(decide), .rnd(rand_fb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
    end else if (pass_start) begin
      m_valid <= 1'b0;
    end else if (en) begin
      m_valid <= p_valid && mode_update;
      if (p_valid && mode_update) m_data <= new_states;
    end
  end

  // ---------------- engines ----------------
  for (genvar e = 0; e < NUM_ENGINES; e++) begin : g_eng
    fastomni_instance #(.T_W(T_W), .W_W(W_W)) u_inst (
      .clk(clk), .rst_n(rst_n),
      .clear(pass_start && !mode_update),
      .acc_en(proc && !mode_update && p_eng == EW'(e)),
      .acc_violation(violation),
      .decide(decide),
      .active(EW'(e) < grp_active),
      .y(y), .weight(grp_weight[e]), .t_thresh(t_thresh),
      .rand_u(rand_fb[e*32 +: 32]),
      .clause_out(clause_out[e]),
      .fb(inst_fb[e])
    );
  end

  always_comb begin
    num_updates = '0;
    for (int e = 0; e < NUM_ENGINES; e++) num_updates += (inst_fb[e] != FB_NONE) ? EW'(1) : EW'(0);
    any_update = (num_updates != '0);
  end

  assign idle = !p_valid && !m_valid;

  initial begin
    assert (FEATURES % LANES == 0) else $error("FEATURES must be a multiple of LANES");
  end
endmodule
