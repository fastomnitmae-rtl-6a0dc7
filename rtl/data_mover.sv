// data_mover: DMA between the AXI-MM master and the accelerator's buffers.
//
// Executes one command from the controller at a time (cmd_start with cmd; busy
// until the transfer, including the last write response, is complete):
//   DM_LOAD_WEIGHTS  read `beats` beats into the weights buffer (beat index 0,1,..)
//   DM_LOAD_BATCH    read example records. A record is 1 label beat (label in
//                    bit 0) followed by XB = ceil(FEATURES/DATA_W) X beats. The
//                    label FIFO is flushed at the start and gets one push per
//                    record; the X beats fill the input buffer from beat 0 up.
//   DM_EVAL          read the states of a clause group and stream them to the core
//   DM_UPDATE        same read, and write the core's updated beats back to the
//                    same addresses
//   DM_RESULT        write one beat (result_data) to `addr`
// Reads of an update pass run ahead of its writes; each address is read before
// it is rewritten, so the pass is hazard-free. The record layout is this
// design's own; the paper's figure shows a single "Input Dataset (X, Y)" region.
// Beats are routed, not transformed: the data outputs towards the buffers, the
// core and the master are the read or core data themselves, gated only by the
// valid/enable signals.
module data_mover
  import tmae_pkg::*;
#(
  parameter int unsigned ADDR_W   = 32,
  parameter int unsigned DATA_W   = 128,
  parameter int unsigned FEATURES = 40000,
  parameter int unsigned XB_AW    = 12,
  parameter int unsigned WB_W     = 3,
  parameter int unsigned XB       = (FEATURES + DATA_W - 1) / DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_start,
  input  dm_cmd_t           cmd,
  output logic              busy,
  input  logic [DATA_W-1:0] result_data,
  // AXI-MM master requests and streams
  output logic              rd_start,
  output logic [ADDR_W-1:0] rd_addr,
  output logic [31:0]       rd_beats,
  input  logic              rd_busy,
  input  logic              rd_valid,
  input  logic [DATA_W-1:0] rd_data,
  output logic              rd_ready,
  output logic              wr_start,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [31:0]       wr_beats,
  input  logic              wr_busy,
  output logic              wr_valid,
  output logic [DATA_W-1:0] wr_data,
  input  logic              wr_ready,
  // local buffers
  output logic              w_wr_en,
  output logic [WB_W-1:0]   w_wr_beat,
  output logic [DATA_W-1:0] w_wr_data,
  output logic              lbl_flush,
  output logic              lbl_push,
  output logic              lbl_din,
  output logic              x_wr_en,
  output logic [XB_AW-1:0]  x_wr_addr,
  output logic [DATA_W-1:0] x_wr_data,
  // compute core
  output logic              core_valid,
  output logic [DATA_W-1:0] core_data,
  input  logic              core_ready,
  input  logic              core_out_valid,
  input  logic [DATA_W-1:0] core_out_data,
  output logic              core_out_ready,
  input  logic              core_idle
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_RUN} st_e;
  st_e         st;
  dm_op_e      op;
  logic [31:0] rec_cnt;
  logic [31:0] beat_cnt;
  logic        res_sent;
  logic        rd_hs;

  wire to_core = (op == DM_EVAL) || (op == DM_UPDATE);

  assign busy     = (st != S_IDLE);
  assign rd_start = (st == S_ISSUE) && (op != DM_RESULT);
  assign wr_start = (st == S_ISSUE) && (op == DM_UPDATE || op == DM_RESULT);
  assign rd_ready = to_core ? core_ready : 1'b1;
  assign rd_hs    = rd_valid && rd_ready && (st == S_RUN);

  assign core_valid = rd_valid && to_core && (st == S_RUN);
  assign core_data  = rd_data;

  assign wr_valid       = (op == DM_UPDATE) ? core_out_valid : (op == DM_RESULT && !res_sent && st == S_RUN);
  assign wr_data        = (op == DM_UPDATE) ? core_out_data  : result_data;
  assign core_out_ready = (op == DM_UPDATE) && wr_ready;

  assign w_wr_en   = rd_hs && (op == DM_LOAD_WEIGHTS);
  assign w_wr_beat = WB_W'(beat_cnt);
  assign w_wr_data = rd_data;
  assign lbl_flush = (st == S_ISSUE) && (op == DM_LOAD_BATCH);
  assign lbl_push  = rd_hs && (op == DM_LOAD_BATCH) && (rec_cnt == 0);
  assign lbl_din   = rd_data[0];
  assign x_wr_en   = rd_hs && (op == DM_LOAD_BATCH) && (rec_cnt != 0);
  assign x_wr_data = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      op        <= DM_LOAD_WEIGHTS;
      rd_addr   <= '0;
      rd_beats  <= '0;
      wr_addr   <= '0;
      wr_beats  <= '0;
      rec_cnt   <= '0;
      beat_cnt  <= '0;
      x_wr_addr <= '0;
      res_sent  <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_start) begin
          st        <= S_ISSUE;
          op        <= cmd.op;
          rd_addr   <= ADDR_W'(cmd.addr);
          rd_beats  <= cmd.beats;
          wr_addr   <= ADDR_W'(cmd.addr);
          wr_beats  <= cmd.beats;
          rec_cnt   <= '0;
          beat_cnt  <= '0;
          x_wr_addr <= '0;
          res_sent  <= 1'b0;
        end
        S_ISSUE: st <= S_RUN;
        S_RUN: begin
          if (rd_hs) begin
            beat_cnt <= beat_cnt + 1;
            rec_cnt  <= (rec_cnt == 32'(XB)) ? '0 : rec_cnt + 1;
            if (x_wr_en) x_wr_addr <= x_wr_addr + 1'b1;
          end
          if (wr_valid && wr_ready && op == DM_RESULT) res_sent <= 1'b1;
          if (!rd_busy && !wr_busy && core_idle && !(op == DM_RESULT && !res_sent))
            st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
