// global_control_fsm: sequencer of a training run (global control unit).
//
// On start it reseeds the random generators, loads the clause weights, and then
// for every epoch walks the example set in batches:
//   fetch    : DM_LOAD_BATCH of min(batch_size, remaining) example records;
//   per example of the batch, per clause group g (NUM_ENGINES clauses, the last
//   group may be smaller):
//     eval   : DM_EVAL of the group's states, the engines accumulate o_j;
//     decide : every engine samples its local update (one cycle, then one to settle);
//     update : DM_UPDATE of the group's states (read, update, write back),
//              skipped when no clause of the group was selected ("bypass");
//   then pops the example's label.
// At the end it writes a result record (magic, examples, clause updates,
// skipped passes) to result_base and raises done. Each data-mover command is
// a cmd_start pulse followed by waiting for its busy to fall.
// State layout: group g starts at state_base + g*NUM_ENGINES*LW*DATA_W/8 with
// LW = 2*FEATURES/LANES beats per clause. The three phases follow the paper
// (data fetching, logical computation, state update); groups, bypass and the
// result record are this design's own.
module global_control_fsm
  import tmae_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 12,
  parameter int unsigned MAX_CLAUSES = 32,
  parameter int unsigned FEATURES    = 40000,
  parameter int unsigned STATE_BITS  = 8,
  parameter int unsigned DATA_W      = 128,
  parameter int unsigned MAX_BATCH   = 8,
  parameter int unsigned XB_AW       = 12,
  parameter int unsigned LANES       = DATA_W / STATE_BITS,
  parameter int unsigned LW          = 2 * FEATURES / LANES,
  parameter int unsigned XB          = (FEATURES + DATA_W - 1) / DATA_W,
  parameter int unsigned EW          = $clog2(NUM_ENGINES + 1),
  parameter int unsigned CW          = $clog2(MAX_CLAUSES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start_pulse,
  input  logic              clear_pulse,
  output stat_t             stat,
  // data mover
  output logic              dm_start,
  output dm_cmd_t           dm_cmd,
  input  logic              dm_busy,
  output logic [DATA_W-1:0] result_data,
  // compute core
  output logic              seed_load,
  output logic              pass_start,
  output logic              mode_update,
  output logic [EW-1:0]     grp_active,
  output logic [CW-1:0]     grp_base,     // index of the group's first clause
  output logic [XB_AW-1:0]  ex_xbase,
  output logic              decide,
  input  logic              any_update,
  input  logic [EW-1:0]     num_updates,
  // label FIFO
  output logic              lbl_pop
);
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned REC   = XB + 1;

  typedef enum logic [3:0] {
    S_IDLE, S_W_CMD, S_W_WAIT, S_B_CMD, S_B_WAIT, S_E_CMD, S_E_WAIT,
    S_DECIDE, S_SETTLE, S_U_CMD, S_U_WAIT, S_NEXT, S_R_CMD, S_R_WAIT
  } st_e;
  st_e st;

  logic [15:0] epoch;
  logic [31:0] ex_base;    // first example of the current batch
  logic [15:0] bcnt;       // examples in the current batch
  logic [15:0] b;          // example within the batch
  logic [CW-1:0] g_first;  // first clause of the current group
  logic [31:0] remaining;
  logic [CW-1:0] left_in_group;

  assign remaining     = cfg.num_examples - ex_base;
  assign left_in_group = CW'(cfg.num_clauses) - g_first;
  assign grp_base      = g_first;
  assign result_data   = DATA_W'({stat.passes_skipped, stat.clause_updates, stat.examples_done, RESULT_MAGIC});

  function automatic logic [31:0] group_addr(input logic [31:0] base, input logic [CW-1:0] first);
    return base + 32'(first) * 32'(LW * BYTES);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      stat        <= '0;
      dm_start    <= 1'b0;
      dm_cmd      <= '0;
      seed_load   <= 1'b0;
      pass_start  <= 1'b0;
      mode_update <= 1'b0;
      grp_active  <= EW'(1);
      ex_xbase    <= '0;
      decide      <= 1'b0;
      lbl_pop     <= 1'b0;
      epoch       <= '0;
      ex_base     <= '0;
      bcnt        <= '0;
      b           <= '0;
      g_first     <= '0;
    end else begin
      dm_start   <= 1'b0;
      seed_load  <= 1'b0;
      pass_start <= 1'b0;
      decide     <= 1'b0;
      lbl_pop    <= 1'b0;
      if (stat.busy) stat.cycles <= stat.cycles + 1;
      unique case (st)
        S_IDLE: begin
          if (clear_pulse) begin
            stat <= '0;
          end else if (start_pulse) begin
            stat        <= '0;
            stat.busy   <= 1'b1;
            seed_load   <= 1'b1;
            epoch       <= '0;
            ex_base     <= '0;
            st          <= S_W_CMD;
          end
        end
        S_W_CMD: begin
          dm_start <= 1'b1;
          dm_cmd   <= '{op: DM_LOAD_WEIGHTS, addr: cfg.weight_base,
                        beats: (32'(cfg.num_clauses) * 32 + DATA_W - 1) / DATA_W};
          st       <= S_W_WAIT;
        end
        S_W_WAIT: if (!dm_busy && !dm_start)
          st <= (cfg.num_examples == 0 || cfg.epochs == 0) ? S_R_CMD : S_B_CMD;
        S_B_CMD: begin
          bcnt     <= (remaining < 32'(cfg.batch_size)) ? remaining[15:0] : cfg.batch_size;
          dm_start <= 1'b1;
          dm_cmd   <= '{op: DM_LOAD_BATCH, addr: cfg.data_base + ex_base * 32'(REC * BYTES),
                        beats: ((remaining < 32'(cfg.batch_size)) ? remaining : 32'(cfg.batch_size)) * 32'(REC)};
          b        <= '0;
          g_first  <= '0;
          st       <= S_B_WAIT;
        end
        S_B_WAIT: if (!dm_busy && !dm_start) st <= S_E_CMD;
        S_E_CMD: begin
          grp_active  <= (left_in_group < CW'(NUM_ENGINES)) ? EW'(left_in_group) : EW'(NUM_ENGINES);
          ex_xbase    <= XB_AW'(32'(b) * 32'(XB));
          mode_update <= 1'b0;
          pass_start  <= 1'b1;
          dm_start    <= 1'b1;
          dm_cmd      <= '{op: DM_EVAL, addr: group_addr(cfg.state_base, g_first),
                           beats: 32'((left_in_group < CW'(NUM_ENGINES)) ? left_in_group : CW'(NUM_ENGINES)) * 32'(LW)};
          st          <= S_E_WAIT;
        end
        S_E_WAIT: if (!dm_busy && !dm_start) st <= S_DECIDE;
        S_DECIDE: begin
          decide <= 1'b1;
          st     <= S_SETTLE;
        end
        S_SETTLE: if (!decide) begin
          if (any_update) begin
            stat.clause_updates <= stat.clause_updates + 32'(num_updates);
            st <= S_U_CMD;
          end else begin
            stat.passes_skipped <= stat.passes_skipped + 1;
            st <= S_NEXT;
          end
        end
        S_U_CMD: begin
          mode_update <= 1'b1;
          pass_start  <= 1'b1;
          dm_start    <= 1'b1;
          dm_cmd      <= '{op: DM_UPDATE, addr: group_addr(cfg.state_base, g_first),
                           beats: 32'(grp_active) * 32'(LW)};
          st          <= S_U_WAIT;
        end
        S_U_WAIT: if (!dm_busy && !dm_start) st <= S_NEXT;
        S_NEXT: begin
          if (32'(g_first) + NUM_ENGINES < 32'(cfg.num_clauses)) begin
            g_first <= g_first + CW'(NUM_ENGINES);
            st      <= S_E_CMD;
          end else begin
            g_first            <= '0;
            lbl_pop            <= 1'b1;
            stat.examples_done <= stat.examples_done + 1;
            if (b + 1 < bcnt) begin
              b  <= b + 1;
              st <= S_E_CMD;
            end else if (ex_base + 32'(bcnt) < cfg.num_examples) begin
              ex_base <= ex_base + 32'(bcnt);
              st      <= S_B_CMD;
            end else if (epoch + 1 < cfg.epochs) begin
              epoch   <= epoch + 1;
              ex_base <= '0;
              st      <= S_B_CMD;
            end else begin
              st <= S_R_CMD;
            end
          end
        end
        S_R_CMD: begin
          dm_start <= 1'b1;
          dm_cmd   <= '{op: DM_RESULT, addr: cfg.result_base, beats: 32'd1};
          st       <= S_R_WAIT;
        end
        S_R_WAIT: if (!dm_busy && !dm_start) begin
          stat.busy <= 1'b0;
          stat.done <= 1'b1;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_batch_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start_pulse |-> 32'(cfg.batch_size) >= 1 && 32'(cfg.batch_size) <= MAX_BATCH);
  a_clauses_fit: assert property (@(posedge clk) disable iff (!rst_n)
    start_pulse |-> 32'(cfg.num_clauses) >= 1 && 32'(cfg.num_clauses) <= MAX_CLAUSES);
endmodule
