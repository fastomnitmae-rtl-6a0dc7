// tmae_pkg: types and constants shared by the FastOmniTMAE training accelerator.
//
// The accelerator trains the clauses of a Tsetlin-machine embedding model. Each
// clause owns one automaton state per literal (a feature or its negation); a
// literal is included in the clause when its state is above the mid threshold N.
// Training of one example is split into an evaluation pass (clause output) and an
// update pass (Type Ia / Ib / II feedback), each clause deciding locally whether to
// update. This package holds the feedback encoding, the configuration and status
// records of the control registers, the data-mover command and the register map.
// The register map and record layouts are this design's own choices.
package tmae_pkg;

  // Feedback selected for one clause for the current example.
  typedef enum logic [1:0] {
    FB_NONE = 2'd0,  // clause not selected for update
    FB_IA   = 2'd1,  // Y=1, o=1: reinforce true literals, forget false ones (1/s)
    FB_IB   = 2'd2,  // Y=1, o=0: forget all literals (1/s)
    FB_II   = 2'd3   // Y=0, o=1: include excluded false literals
  } fb_e;

  // Configuration written by the host over AXI-Lite.
  typedef struct packed {
    logic [31:0] data_base;     // byte address of the first example record
    logic [31:0] state_base;    // byte address of the automaton-state matrix
    logic [31:0] weight_base;   // byte address of the clause weights
    logic [31:0] result_base;   // byte address of the result/status record
    logic [31:0] num_examples;  // examples per epoch
    logic [15:0] batch_size;    // examples fetched per batch (1..MAX_BATCH)
    logic [15:0] num_clauses;   // clauses trained (1..MAX_CLAUSES)
    logic [15:0] t_thresh;      // hyperparameter T
    logic [16:0] s_inv;         // 1/s in Q16 (65536 = 1.0)
    logic [15:0] epochs;        // passes over the example set
    logic [31:0] seed;          // random-number seed
  } cfg_t;

  // Status reported back to the host.
  typedef struct packed {
    logic        busy;
    logic        done;
    logic [31:0] examples_done;   // examples trained (all epochs)
    logic [31:0] clause_updates;  // clause feedback events applied
    logic [31:0] passes_skipped;  // update passes bypassed (no clause selected)
    logic [31:0] cycles;          // clock cycles of the last run
  } stat_t;

  // Data-mover operations.
  typedef enum logic [2:0] {
    DM_LOAD_WEIGHTS = 3'd0,  // DDR -> weights buffer
    DM_LOAD_BATCH   = 3'd1,  // DDR -> label FIFO + input X buffer
    DM_EVAL         = 3'd2,  // DDR -> compute core
    DM_UPDATE       = 3'd3,  // DDR -> compute core -> DDR (same addresses)
    DM_RESULT       = 3'd4   // status record -> DDR
  } dm_op_e;

  typedef struct packed {
    dm_op_e      op;
    logic [31:0] addr;   // byte address, DATA_W/8 aligned
    logic [31:0] beats;  // number of DATA_W beats
  } dm_cmd_t;

  // AXI-Lite register byte offsets.
  localparam logic [7:0] REG_CTRL        = 8'h00;  // [0] start, [1] clear (write 1)
  localparam logic [7:0] REG_STATUS      = 8'h04;  // [0] busy, [1] done
  localparam logic [7:0] REG_DATA_BASE   = 8'h08;
  localparam logic [7:0] REG_STATE_BASE  = 8'h0C;
  localparam logic [7:0] REG_WEIGHT_BASE = 8'h10;
  localparam logic [7:0] REG_RESULT_BASE = 8'h14;
  localparam logic [7:0] REG_NUM_EX      = 8'h18;
  localparam logic [7:0] REG_BATCH       = 8'h1C;
  localparam logic [7:0] REG_CLAUSES     = 8'h20;
  localparam logic [7:0] REG_T           = 8'h24;
  localparam logic [7:0] REG_S_INV       = 8'h28;
  localparam logic [7:0] REG_EPOCHS      = 8'h2C;
  localparam logic [7:0] REG_SEED        = 8'h30;
  localparam logic [7:0] REG_EX_DONE     = 8'h34;
  localparam logic [7:0] REG_UPDATES     = 8'h38;
  localparam logic [7:0] REG_SKIPPED     = 8'h3C;
  localparam logic [7:0] REG_CYCLES      = 8'h40;

  // Marker written in the first word of the result record.
  localparam logic [31:0] RESULT_MAGIC = 32'h7A3E_D0E5;

  // xorshift32 step used by the random-number generators (and by reference models).
  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  // Seed of generator number idx derived from the host seed (never zero).
  function automatic logic [31:0] rng_seed(input logic [31:0] seed, input int unsigned idx);
    logic [31:0] v;
    v = seed ^ (32'h9E37_79B9 * (idx + 1));
    return (v == 32'd0) ? 32'h1234_5678 : v;
  endfunction

endpackage
