// tb_axi_mm_master: runs linear reads and writes of random length and
// alignment (many crossing 4 KB boundaries) through the master into a
// behavioural AXI4 memory with random back-pressure, with a consumer and a
// producer that also stall at random. Checks every read beat, the written
// memory, that no burst crosses 4 KB or exceeds 16 beats, correct WLAST, and
// that a read and a write can be in flight together.
`timescale 1ns/1ps
module tb_axi_mm_master;
  localparam int unsigned AW = 32, DW = 128, BY = DW / 8, DEPTH = 1 << 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_start, rd_busy, rd_valid, rd_ready, wr_start, wr_busy, wr_valid, wr_ready;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [31:0] rd_beats, wr_beats;
  logic [DW-1:0] rd_data, wr_data;
  logic [AW-1:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [DW-1:0] rdata, wdata;
  logic [BY-1:0] wstrb;
  int checks = 0, failures = 0, n_long = 0, n_overlap = 0;

  axi_mm_master #(.ADDR_W(AW), .DATA_W(DW), .MAX_BURST(16)) dut (
    .clk, .rst_n, .rd_start, .rd_addr, .rd_beats, .rd_busy, .rd_valid, .rd_data, .rd_ready,
    .wr_start, .wr_addr, .wr_beats, .wr_busy, .wr_valid, .wr_data, .wr_ready,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.ADDR_W(AW), .DATA_W(DW), .DEPTH(DEPTH), .STALL_PCT(25)) mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  always @(posedge clk) if (rst_n) begin
    if (arvalid && arready && (arlen > 15 || arsize != 3'd4 || arburst != 2'b01)) failures++;
    if (awvalid && awready && (awlen > 15 || awsize != 3'd4 || awburst != 2'b01)) failures++;
    if (rd_busy && wr_busy) n_overlap++;
  end

  function automatic logic [DW-1:0] pat(input int unsigned idx, input int unsigned salt);
    return {idx ^ salt, ~idx, idx * 32'h9E3779B1, salt};
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_start = 0; wr_start = 0; rd_ready = 0; wr_valid = 0; rd_addr = 0; wr_addr = 0; rd_beats = 0; wr_beats = 0; wr_data = 0;
    for (int i = 0; i < DEPTH; i++) mem.mem[i] = pat(i, 0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int unsigned ra, rb, wa, wb, got, sent, salt;
      ra = $urandom % (DEPTH / 2); rb = 1 + $urandom % 300;
      wa = DEPTH / 2 + $urandom % (DEPTH / 2 - 400); wb = 1 + $urandom % 300;
      salt = n + 1;
      if (rb > 16) n_long++;
      @(negedge clk);
      rd_start = 1; rd_addr = ra * BY; rd_beats = rb;
      wr_start = 1; wr_addr = wa * BY; wr_beats = wb;
      @(negedge clk);
      rd_start = 0; wr_start = 0;
      got = 0; sent = 0;
      while (got < rb || sent < wb || rd_busy || wr_busy) begin
        rd_ready = ($urandom % 4) != 0;
        wr_valid = (sent < wb) && (($urandom % 4) != 0);
        wr_data  = pat(wa + sent, salt);
        @(posedge clk);
        if (rd_valid && rd_ready) begin
          checks++;
          if (rd_data !== mem.mem[ra + got]) begin failures++; if (failures < 5) $display("FAIL read beat %0d of %0d", got, n); end
          got++;
        end
        if (wr_valid && wr_ready) sent++;
        #1;
      end
      rd_ready = 0; wr_valid = 0;
      checks++;
      if (got != rb || sent != wb) begin failures++; $display("FAIL beat counts %0d/%0d %0d/%0d", got, rb, sent, wb); end
      for (int i = 0; i < wb; i++) begin
        checks++;
        if (mem.mem[wa + i] !== pat(wa + i, salt)) begin failures++; if (failures < 5) $display("FAIL write beat %0d of %0d", i, n); end
      end
    end
    checks++; if (mem.errors != 0) begin failures++; $display("FAIL memory model saw %0d protocol errors", mem.errors); end
    checks++; if (n_overlap == 0 || n_long == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
