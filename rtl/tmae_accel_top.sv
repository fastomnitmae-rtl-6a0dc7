// tmae_accel_top: FastOmniTMAE training accelerator IP.
//
// Trains the clauses of a Tsetlin-machine embedding model for one target token.
// Automaton states (STATE_BITS per literal, 2*FEATURES literals per clause),
// clause weights, examples and a result record live in external memory reached
// through an AXI4 master; a host configures and starts a run through an
// AXI4-Lite slave. Inside:
//   axi_lite_slave     control/status registers
//   global_control_fsm run sequencing (fetch batch, evaluate, decide, update)
//   axi_mm_master      AXI4 bursts for all memory traffic
//   data_mover         routes read beats to the buffers or the compute core and
//                      updated beats back to memory
//   input_x_buffer, label_fifo, weights_buffer   local buffers of the batch
//   compute_core       NUM_ENGINES clause engines with shared clause logic,
//                      per-engine feedback logic and shared state-update logic
// One clock, one active-low asynchronous reset. busy/done mirror the STATUS
// register. Training time is dominated by streaming the states: for every
// example each group of clauses is read once (evaluation) and, unless no
// clause was selected, read and written once more (update), one beat of LANES
// states per cycle. The block structure follows the paper's architecture
// figure; interface widths, layouts and the register map are this design's.
// Some outputs are constant by design: ARSIZE/AWSIZE (full DATA_W beats),
// ARBURST/AWBURST (INCR), WSTRB (all ones) and the AXI-Lite response codes
// (always OKAY). The single read channel and single write channel match the
// paper's smaller build (one HP port for reads, one for writes); its larger
// build spreads reads and writes over two ports each, which is not done here.
module tmae_accel_top
  import tmae_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 12,
  parameter int unsigned MAX_CLAUSES = 32,
  parameter int unsigned FEATURES    = 40000,
  parameter int unsigned STATE_BITS  = 8,
  parameter int unsigned DATA_W      = 128,
  parameter int unsigned ADDR_W      = 32,
  parameter int unsigned MAX_BATCH   = 8,
  parameter int unsigned MAX_BURST   = 16,
  parameter int unsigned AXIL_ADDR_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4-Lite control slave
  input  logic [AXIL_ADDR_W-1:0] s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic [3:0]             s_axil_wstrb,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready,
  // AXI4 memory master
  output logic [ADDR_W-1:0]      m_axi_araddr,
  output logic [7:0]             m_axi_arlen,
  output logic [2:0]             m_axi_arsize,
  output logic [1:0]             m_axi_arburst,
  output logic                   m_axi_arvalid,
  input  logic                   m_axi_arready,
  input  logic [DATA_W-1:0]      m_axi_rdata,
  input  logic [1:0]             m_axi_rresp,
  input  logic                   m_axi_rlast,
  input  logic                   m_axi_rvalid,
  output logic                   m_axi_rready,
  output logic [ADDR_W-1:0]      m_axi_awaddr,
  output logic [7:0]             m_axi_awlen,
  output logic [2:0]             m_axi_awsize,
  output logic [1:0]             m_axi_awburst,
  output logic                   m_axi_awvalid,
  input  logic                   m_axi_awready,
  output logic [DATA_W-1:0]      m_axi_wdata,
  output logic [DATA_W/8-1:0]    m_axi_wstrb,
  output logic                   m_axi_wlast,
  output logic                   m_axi_wvalid,
  input  logic                   m_axi_wready,
  input  logic [1:0]             m_axi_bresp,
  input  logic                   m_axi_bvalid,
  output logic                   m_axi_bready,
  // status
  output logic                   busy,
  output logic                   done
);
  localparam int unsigned LANES  = DATA_W / STATE_BITS;
  localparam int unsigned XB     = (FEATURES + DATA_W - 1) / DATA_W;
  localparam int unsigned XDEPTH = MAX_BATCH * XB;
  localparam int unsigned XB_AW  = $clog2(XDEPTH);
  localparam int unsigned EW     = $clog2(NUM_ENGINES + 1);
  localparam int unsigned CW     = $clog2(MAX_CLAUSES + 1);
  localparam int unsigned WPB    = DATA_W / 32;
  localparam int unsigned WNB    = (MAX_CLAUSES + WPB - 1) / WPB;
  localparam int unsigned WB_W   = (WNB > 1) ? $clog2(WNB) : 1;

  cfg_t    cfg;
  stat_t   stat;
  logic    start_pulse, clear_pulse;

  // controller <-> data mover / core
  logic              dm_start, dm_busy;
  dm_cmd_t           dm_cmd;
  logic [DATA_W-1:0] result_data;
  logic              seed_load, pass_start, mode_update, decide, any_update;
  logic [EW-1:0]     grp_active, num_updates;
  logic [CW-1:0]     grp_base;
  logic [XB_AW-1:0]  ex_xbase;
  logic              lbl_pop;

  // data mover <-> AXI master
  logic              rd_start, rd_busy, rd_valid, rd_ready;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  logic [31:0]       rd_beats, wr_beats;
  logic [DATA_W-1:0] rd_data, wr_data;
  logic              wr_start, wr_busy, wr_valid, wr_ready;

  // buffers
  logic              w_wr_en;
  logic [WB_W-1:0]   w_wr_beat;
  logic [DATA_W-1:0] w_wr_data;
  logic              lbl_flush, lbl_push, lbl_din, lbl_head, lbl_empty, lbl_full;
  logic [$clog2(MAX_BATCH > 1 ? MAX_BATCH : 2):0] lbl_count;
  logic              x_wr_en, x_rd_en;
  logic [XB_AW-1:0]  x_wr_addr, x_rd_addr;
  logic [DATA_W-1:0] x_wr_data, x_rd_data;
  logic [CW-1:0]        w_rd_idx  [NUM_ENGINES];
  logic signed [31:0]   w_rd_data [NUM_ENGINES];

  // core streams
  logic              c_in_valid, c_in_ready, c_out_valid, c_out_ready, core_idle;
  logic [DATA_W-1:0] c_in_data, c_out_data;
  logic [NUM_ENGINES-1:0] clause_out;

  assign busy = stat.busy;
  assign done = stat.done;

  axi_lite_slave #(.AXIL_ADDR_W(AXIL_ADDR_W)) u_axil (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb,
    .s_axil_wvalid, .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp,
    .s_axil_rvalid, .s_axil_rready,
    .cfg, .start_pulse, .clear_pulse, .stat
  );

  global_control_fsm #(
    .NUM_ENGINES(NUM_ENGINES), .MAX_CLAUSES(MAX_CLAUSES), .FEATURES(FEATURES),
    .STATE_BITS(STATE_BITS), .DATA_W(DATA_W), .MAX_BATCH(MAX_BATCH), .XB_AW(XB_AW)
  ) u_ctrl (
    .clk, .rst_n, .cfg, .start_pulse, .clear_pulse, .stat,
    .dm_start, .dm_cmd, .dm_busy, .result_data,
    .seed_load, .pass_start, .mode_update, .grp_active, .grp_base, .ex_xbase,
    .decide, .any_update, .num_updates, .lbl_pop
  );

  axi_mm_master #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .MAX_BURST(MAX_BURST)) u_axi (
    .clk, .rst_n,
    .rd_start, .rd_addr, .rd_beats, .rd_busy, .rd_valid, .rd_data, .rd_ready,
    .wr_start, .wr_addr, .wr_beats, .wr_busy, .wr_valid, .wr_data, .wr_ready,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready
  );

  data_mover #(
    .ADDR_W(ADDR_W), .DATA_W(DATA_W), .FEATURES(FEATURES), .XB_AW(XB_AW), .WB_W(WB_W)
  ) u_dm (
    .clk, .rst_n, .cmd_start(dm_start), .cmd(dm_cmd), .busy(dm_busy), .result_data,
    .rd_start, .rd_addr, .rd_beats, .rd_busy, .rd_valid, .rd_data, .rd_ready,
    .wr_start, .wr_addr, .wr_beats, .wr_busy, .wr_valid, .wr_data, .wr_ready,
    .w_wr_en, .w_wr_beat, .w_wr_data, .lbl_flush, .lbl_push, .lbl_din,
    .x_wr_en, .x_wr_addr, .x_wr_data,
    .core_valid(c_in_valid), .core_data(c_in_data), .core_ready(c_in_ready),
    .core_out_valid(c_out_valid), .core_out_data(c_out_data), .core_out_ready(c_out_ready),
    .core_idle
  );

  input_x_buffer #(.DATA_W(DATA_W), .DEPTH(XDEPTH), .AW(XB_AW)) u_xbuf (
    .clk, .wr_en(x_wr_en), .wr_addr(x_wr_addr), .wr_data(x_wr_data),
    .rd_en(x_rd_en), .rd_addr(x_rd_addr), .rd_data(x_rd_data)
  );

  label_fifo #(.DEPTH(MAX_BATCH)) u_lbl (
    .clk, .rst_n, .flush(lbl_flush), .push(lbl_push), .din(lbl_din), .pop(lbl_pop),
    .head(lbl_head), .empty(lbl_empty), .full(lbl_full), .count(lbl_count)
  );

  for (genvar e = 0; e < NUM_ENGINES; e++) begin : g_widx
    assign w_rd_idx[e] = grp_base + CW'(e);
  end

  weights_buffer #(
    .MAX_CLAUSES(MAX_CLAUSES), .W_W(32), .DATA_W(DATA_W), .NRD(NUM_ENGINES), .BW(WB_W), .CW(CW)
  ) u_wbuf (
    .clk, .rst_n, .wr_en(w_wr_en), .wr_beat(w_wr_beat), .wr_data(w_wr_data),
    .rd_idx(w_rd_idx), .rd_data(w_rd_data)
  );

  compute_core #(
    .NUM_ENGINES(NUM_ENGINES), .FEATURES(FEATURES), .STATE_BITS(STATE_BITS),
    .DATA_W(DATA_W), .XB_AW(XB_AW), .T_W(16), .W_W(32)
  ) u_core (
    .clk, .rst_n,
    .seed(cfg.seed), .seed_load, .t_thresh(cfg.t_thresh), .s_inv(cfg.s_inv),
    .pass_start, .mode_update, .grp_active, .ex_xbase, .y(lbl_head), .decide,
    .grp_weight(w_rd_data), .any_update, .num_updates, .clause_out, .idle(core_idle),
    .s_valid(c_in_valid), .s_data(c_in_data), .s_ready(c_in_ready),
    .m_valid(c_out_valid), .m_data(c_out_data), .m_ready(c_out_ready),
    .x_rd_en, .x_rd_addr, .x_rd_data
  );

  a_label_present: assert property (@(posedge clk) disable iff (!rst_n)
    decide |-> !lbl_empty);
endmodule
