// axi_mm_master: AXI4 memory-mapped master of the accelerator.
//
// Turns linear transfer requests into INCR bursts of at most MAX_BURST beats that
// never cross a 4 KB boundary. A read request (rd_start with rd_addr, rd_beats)
// issues AR bursts back to back and delivers the R beats on the rd_* valid/ready
// stream in address order; rd_busy falls after the last beat. A write request
// (wr_start, wr_addr, wr_beats) issues AW bursts and takes the W beats from the
// wr_* stream, marking WLAST by splitting the beat stream with the same rule;
// wr_busy falls when every burst has its B response. A read and a write can run
// at the same time (one read channel, one write channel, ID 0, full-width beats).
// Addresses must be DATA_W/8 aligned. The paper gives only the interface type
// (AXI-MM for data and state traffic); burst size and splitting are this design's.
// The data paths are wires: R data goes straight to rd_data and wr_data
// straight to WDATA, with only the handshakes and burst bookkeeping in logic.
module axi_mm_master #(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 128,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // read request and data stream
  input  logic                rd_start,
  input  logic [ADDR_W-1:0]   rd_addr,
  input  logic [31:0]         rd_beats,
  output logic                rd_busy,
  output logic                rd_valid,
  output logic [DATA_W-1:0]   rd_data,
  input  logic                rd_ready,
  // write request and data stream
  input  logic                wr_start,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [31:0]         wr_beats,
  output logic                wr_busy,
  input  logic                wr_valid,
  input  logic [DATA_W-1:0]   wr_data,
  output logic                wr_ready,
  // AXI4 master
  output logic [ADDR_W-1:0]   m_axi_araddr,
  output logic [7:0]          m_axi_arlen,
  output logic [2:0]          m_axi_arsize,
  output logic [1:0]          m_axi_arburst,
  output logic                m_axi_arvalid,
  input  logic                m_axi_arready,
  input  logic [DATA_W-1:0]   m_axi_rdata,
  input  logic [1:0]          m_axi_rresp,
  input  logic                m_axi_rlast,
  input  logic                m_axi_rvalid,
  output logic                m_axi_rready,
  output logic [ADDR_W-1:0]   m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [DATA_W-1:0]   m_axi_wdata,
  output logic [DATA_W/8-1:0] m_axi_wstrb,
  output logic                m_axi_wlast,
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  input  logic [1:0]          m_axi_bresp,
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready
);
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned BSH   = $clog2(BYTES);

  // Beats of the next burst from address a with rem beats left.
  function automatic logic [31:0] burst_beats(input logic [ADDR_W-1:0] a, input logic [31:0] rem);
    logic [31:0] to4k, n;
    to4k = (32'd4096 - 32'(a[11:0])) >> BSH;
    n    = rem;
    if (n > 32'(MAX_BURST)) n = 32'(MAX_BURST);
    if (n > to4k)           n = to4k;
    return n;
  endfunction

  // ---------------- read address ----------------
  logic [ADDR_W-1:0] ar_addr;
  logic [31:0]       ar_rem, r_rem;
  logic [31:0]       ar_n;

  assign ar_n          = burst_beats(ar_addr, ar_rem);
  assign m_axi_arsize  = 3'(BSH);
  assign m_axi_arburst = 2'b01;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_addr       <= '0;
      ar_rem        <= '0;
      r_rem         <= '0;
      m_axi_arvalid <= 1'b0;
      m_axi_araddr  <= '0;
      m_axi_arlen   <= '0;
    end else begin
      if (rd_start && !rd_busy) begin
        ar_addr <= rd_addr;
        ar_rem  <= rd_beats;
        r_rem   <= rd_beats;
      end else begin
        if (m_axi_arvalid && m_axi_arready) m_axi_arvalid <= 1'b0;
        if ((!m_axi_arvalid || m_axi_arready) && ar_rem != 0) begin
          m_axi_arvalid <= 1'b1;
          m_axi_araddr  <= ar_addr;
          m_axi_arlen   <= 8'(ar_n - 1);
          ar_addr       <= ar_addr + ADDR_W'(ar_n << BSH);
          ar_rem        <= ar_rem - ar_n;
        end
        if (m_axi_rvalid && m_axi_rready) r_rem <= r_rem - 1;
      end
    end
  end

  assign rd_busy      = (r_rem != 0) || m_axi_arvalid;
  assign rd_valid     = m_axi_rvalid && (r_rem != 0);
  assign rd_data      = m_axi_rdata;
  assign m_axi_rready = rd_ready && (r_rem != 0);

  // ---------------- write address / data / response ----------------
  logic [ADDR_W-1:0] aw_addr, w_addr;
  logic [31:0]       aw_rem, w_rem, w_left_in_burst, aw_n, w_n;
  logic [31:0]       bursts_out;   // AW issued minus B received

  assign aw_n          = burst_beats(aw_addr, aw_rem);
  assign w_n           = burst_beats(w_addr, w_rem);
  assign m_axi_awsize  = 3'(BSH);
  assign m_axi_awburst = 2'b01;
  assign m_axi_bready  = 1'b1;

  logic w_hs;
  assign m_axi_wvalid = wr_valid && (w_rem != 0);
  assign wr_ready     = m_axi_wready && (w_rem != 0);
  assign m_axi_wdata  = wr_data;
  assign m_axi_wstrb  = '1;
  assign m_axi_wlast  = (w_left_in_burst == 0) ? (w_n == 1) : (w_left_in_burst == 1);
  assign w_hs         = m_axi_wvalid && m_axi_wready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_addr         <= '0;
      aw_rem          <= '0;
      w_addr          <= '0;
      w_rem           <= '0;
      w_left_in_burst <= '0;
      bursts_out      <= '0;
      m_axi_awvalid   <= 1'b0;
      m_axi_awaddr    <= '0;
      m_axi_awlen     <= '0;
    end else begin
      if (wr_start && !wr_busy) begin
        aw_addr         <= wr_addr;
        aw_rem          <= wr_beats;
        w_addr          <= wr_addr;
        w_rem           <= wr_beats;
        w_left_in_burst <= '0;
      end else begin
        if (m_axi_awvalid && m_axi_awready) m_axi_awvalid <= 1'b0;
        if ((!m_axi_awvalid || m_axi_awready) && aw_rem != 0) begin
          m_axi_awvalid <= 1'b1;
          m_axi_awaddr  <= aw_addr;
          m_axi_awlen   <= 8'(aw_n - 1);
          aw_addr       <= aw_addr + ADDR_W'(aw_n << BSH);
          aw_rem        <= aw_rem - aw_n;
        end
        if (w_hs) begin
          w_rem  <= w_rem - 1;
          w_addr <= w_addr + ADDR_W'(BYTES);
          w_left_in_burst <= ((w_left_in_burst == 0) ? w_n : w_left_in_burst) - 1;
        end
      end
      bursts_out <= bursts_out + ((m_axi_awvalid && m_axi_awready) ? 32'd1 : 32'd0)
                               - ((m_axi_bvalid && m_axi_bready) ? 32'd1 : 32'd0);
    end
  end

  assign wr_busy = (aw_rem != 0) || (w_rem != 0) || m_axi_awvalid || (bursts_out != 0);

  // ---------------- protocol rules ----------------
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr) && $stable(m_axi_arlen));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr) && $stable(m_axi_awlen));
  a_rd_okay: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_rvalid && m_axi_rready |-> m_axi_rresp == 2'b00);
  a_wr_okay: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_bvalid |-> m_axi_bresp == 2'b00);
endmodule
