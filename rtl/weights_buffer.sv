// weights_buffer: clause weights w_j of the model being trained.
//
// Filled from DDR with DATA_W-bit beats, each holding DATA_W/W_W signed weights,
// weight j in beat j/(DATA_W/W_W) at lane j%(DATA_W/W_W), lowest lane first.
// NRD combinational read ports give the weights of the clauses of the current
// clause group. The weights are only read during training (the paper's training
// procedure updates none). Register-based because it is small (32 weights);
// the paper places it in BRAM/URAM.
module weights_buffer #(
  parameter int unsigned MAX_CLAUSES = 32,
  parameter int unsigned W_W         = 32,
  parameter int unsigned DATA_W      = 128,
  parameter int unsigned NRD         = 12,
  parameter int unsigned PER_BEAT    = DATA_W / W_W,
  parameter int unsigned NBEATS      = (MAX_CLAUSES + PER_BEAT - 1) / PER_BEAT,
  parameter int unsigned BW          = (NBEATS > 1) ? $clog2(NBEATS) : 1,
  parameter int unsigned CW          = $clog2(MAX_CLAUSES + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [BW-1:0]         wr_beat,
  input  logic [DATA_W-1:0]     wr_data,
  input  logic [CW-1:0]         rd_idx  [NRD],
  output logic signed [W_W-1:0] rd_data [NRD]
);
  localparam int unsigned IW = $clog2(NBEATS*PER_BEAT);
  logic signed [W_W-1:0] w [NBEATS*PER_BEAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBEATS*PER_BEAT; i++) w[i] <= '0;
    end else if (wr_en) begin
      for (int k = 0; k < PER_BEAT; k++) w[int'(wr_beat)*PER_BEAT + k] <= wr_data[k*W_W +: W_W];
    end
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) begin
      rd_data[r] = (int'(rd_idx[r]) < NBEATS*PER_BEAT) ? w[IW'(rd_idx[r])] : '0;
    end
  end
endmodule
