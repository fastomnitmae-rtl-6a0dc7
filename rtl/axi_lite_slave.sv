// axi_lite_slave: control and status registers on an AXI4-Lite slave port.
//
// The host writes the training configuration (buffer addresses, example count,
// batch size, clause count, T, 1/s, epochs, seed) and starts a run by writing 1
// to CTRL[0]; writing 1 to CTRL[1] clears the done flag and counters. STATUS and
// the counters are read-only. Register offsets are listed in tmae_pkg (REG_*).
// One transaction at a time per direction; a write completes (B) one cycle
// after both its address and data were taken; a read returns data one cycle
// after its address. Responses are always OKAY. The paper names the interface
// and what it carries; the register map is this design's own.
module axi_lite_slave
  import tmae_pkg::*;
#(
  parameter int unsigned AXIL_ADDR_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
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
  output cfg_t                   cfg,
  output logic                   start_pulse,
  output logic                   clear_pulse,
  input  stat_t                  stat
);
  logic                   aw_held, w_held;
  logic [AXIL_ADDR_W-1:0] aw_q;
  logic [31:0]            w_q;
  logic [3:0]             ws_q;

  assign s_axil_awready = !aw_held && !s_axil_bvalid;
  assign s_axil_wready  = !w_held && !s_axil_bvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw, input logic [3:0] st);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[b*8 +: 8] = st[b] ? nw[b*8 +: 8] : old[b*8 +: 8];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_held       <= 1'b0;
      w_held        <= 1'b0;
      aw_q          <= '0;
      w_q           <= '0;
      ws_q          <= '0;
      s_axil_bvalid <= 1'b0;
      start_pulse   <= 1'b0;
      clear_pulse   <= 1'b0;
      cfg           <= '0;
      cfg.batch_size  <= 16'd1;
      cfg.num_clauses <= 16'd1;
      cfg.epochs      <= 16'd1;
      cfg.s_inv       <= 17'h10000;
    end else begin
      start_pulse <= 1'b0;
      clear_pulse <= 1'b0;
      if (s_axil_awvalid && s_axil_awready) begin aw_held <= 1'b1; aw_q <= s_axil_awaddr; end
      if (s_axil_wvalid && s_axil_wready) begin w_held <= 1'b1; w_q <= s_axil_wdata; ws_q <= s_axil_wstrb; end
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (aw_held && w_held) begin
        aw_held       <= 1'b0;
        w_held        <= 1'b0;
        s_axil_bvalid <= 1'b1;
        unique case ({aw_q[7:2], 2'b00})
          REG_CTRL: begin
            start_pulse <= ws_q[0] && w_q[0];
            clear_pulse <= ws_q[0] && w_q[1];
          end
          REG_DATA_BASE:   cfg.data_base    <= merge(cfg.data_base, w_q, ws_q);
          REG_STATE_BASE:  cfg.state_base   <= merge(cfg.state_base, w_q, ws_q);
          REG_WEIGHT_BASE: cfg.weight_base  <= merge(cfg.weight_base, w_q, ws_q);
          REG_RESULT_BASE: cfg.result_base  <= merge(cfg.result_base, w_q, ws_q);
          REG_NUM_EX:      cfg.num_examples <= merge(cfg.num_examples, w_q, ws_q);
          REG_BATCH:       cfg.batch_size   <= 16'(merge(32'(cfg.batch_size), w_q, ws_q));
          REG_CLAUSES:     cfg.num_clauses  <= 16'(merge(32'(cfg.num_clauses), w_q, ws_q));
          REG_T:           cfg.t_thresh     <= 16'(merge(32'(cfg.t_thresh), w_q, ws_q));
          REG_S_INV:       cfg.s_inv        <= 17'(merge(32'(cfg.s_inv), w_q, ws_q));
          REG_EPOCHS:      cfg.epochs       <= 16'(merge(32'(cfg.epochs), w_q, ws_q));
          REG_SEED:        cfg.seed         <= merge(cfg.seed, w_q, ws_q);
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        unique case ({s_axil_araddr[7:2], 2'b00})
          REG_CTRL:        s_axil_rdata <= '0;
          REG_STATUS:      s_axil_rdata <= {30'd0, stat.done, stat.busy};
          REG_DATA_BASE:   s_axil_rdata <= cfg.data_base;
          REG_STATE_BASE:  s_axil_rdata <= cfg.state_base;
          REG_WEIGHT_BASE: s_axil_rdata <= cfg.weight_base;
          REG_RESULT_BASE: s_axil_rdata <= cfg.result_base;
          REG_NUM_EX:      s_axil_rdata <= cfg.num_examples;
          REG_BATCH:       s_axil_rdata <= 32'(cfg.batch_size);
          REG_CLAUSES:     s_axil_rdata <= 32'(cfg.num_clauses);
          REG_T:           s_axil_rdata <= 32'(cfg.t_thresh);
          REG_S_INV:       s_axil_rdata <= 32'(cfg.s_inv);
          REG_EPOCHS:      s_axil_rdata <= 32'(cfg.epochs);
          REG_SEED:        s_axil_rdata <= cfg.seed;
          REG_EX_DONE:     s_axil_rdata <= stat.examples_done;
          REG_UPDATES:     s_axil_rdata <= stat.clause_updates;
          REG_SKIPPED:     s_axil_rdata <= stat.passes_skipped;
          REG_CYCLES:      s_axil_rdata <= stat.cycles;
          default:         s_axil_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
