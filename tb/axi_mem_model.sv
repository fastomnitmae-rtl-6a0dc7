// axi_mem_model: behavioural AXI4 slave memory standing in for the external DDR.
//
// Not synthesizable; testbench use only. Holds DEPTH beats of DATA_W bits,
// beat index = address / (DATA_W/8). Accepts any number of outstanding read and
// write bursts (INCR only), answers reads in order and gives one OKAY B per
// write burst. With STALL_PCT > 0 it randomly withholds ARREADY/AWREADY/WREADY
// and RVALID to exercise back-pressure. Testbenches preload and inspect `mem`
// hierarchically. Counts bursts crossing a 4 KB boundary as protocol errors.
module axi_mem_model #(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 128,
  parameter int unsigned DEPTH     = 1 << 18,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   araddr,
  input  logic [7:0]          arlen,
  input  logic                arvalid,
  output logic                arready,
  output logic [DATA_W-1:0]   rdata,
  output logic [1:0]          rresp,
  output logic                rlast,
  output logic                rvalid,
  input  logic                rready,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic                awvalid,
  output logic                awready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic                wlast,
  input  logic                wvalid,
  output logic                wready,
  output logic [1:0]          bresp,
  output logic                bvalid,
  input  logic                bready
);
  localparam int unsigned BYTES = DATA_W / 8;
  logic [DATA_W-1:0] mem [DEPTH];

  int unsigned ar_q_addr[$], ar_q_len[$];
  int unsigned aw_q_addr[$], aw_q_len[$];
  logic [DATA_W-1:0] w_q_data[$];
  bit w_q_last[$];
  int unsigned r_cnt, w_cnt, b_pending;
  int unsigned errors, rd_bursts, wr_bursts, stall_cycles;

  function automatic bit stall();
    return (STALL_PCT != 0) && (($urandom % 100) < STALL_PCT);
  endfunction

  function automatic bit crosses4k(input int unsigned a, input int unsigned len);
    return ((a & 32'hFFF) + (len + 1) * BYTES) > 4096;
  endfunction

  initial begin
    r_cnt = 0; w_cnt = 0; b_pending = 0; errors = 0; rd_bursts = 0; wr_bursts = 0; stall_cycles = 0;
    arready = 0; awready = 0; wready = 0; rvalid = 0; bvalid = 0; rlast = 0; rdata = '0;
    rresp = 0; bresp = 0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      arready <= 0; awready <= 0; wready <= 0; rvalid <= 0; bvalid <= 0;
    end else begin
      // address channels
      if (arvalid && arready) begin
        ar_q_addr.push_back(araddr); ar_q_len.push_back(arlen); rd_bursts++;
        if (crosses4k(araddr, arlen)) errors++;
      end
      if (awvalid && awready) begin
        aw_q_addr.push_back(awaddr); aw_q_len.push_back(awlen); wr_bursts++;
        if (crosses4k(awaddr, awlen)) errors++;
      end
      arready <= !stall();
      awready <= !stall();
      // read data
      if (rvalid && rready) begin
        if (rlast) begin
          void'(ar_q_addr.pop_front()); void'(ar_q_len.pop_front()); r_cnt = 0;
        end else r_cnt++;
      end
      if ((!rvalid || rready)) begin
        if (ar_q_addr.size() > 0 && !(rvalid && rready && rlast && ar_q_addr.size() == 0) && !stall()) begin
          int unsigned idx;
          idx = ar_q_addr[0] / BYTES + r_cnt;
          rdata <= (idx < DEPTH) ? mem[idx] : '0;
          rlast <= (r_cnt == ar_q_len[0]);
          rvalid <= 1;
        end else begin
          rvalid <= 0;
          if (STALL_PCT != 0) stall_cycles++;
        end
      end
      // write data (W beats may arrive before their AW)
      if (wvalid && wready) begin
        w_q_data.push_back(wdata); w_q_last.push_back(wlast);
      end
      while (w_q_data.size() > 0 && aw_q_addr.size() > 0) begin
        int unsigned idx;
        idx = aw_q_addr[0] / BYTES + w_cnt;
        if (idx < DEPTH) mem[idx] = w_q_data[0]; else errors++;
        if (w_q_last[0] != (w_cnt == aw_q_len[0])) errors++;
        void'(w_q_data.pop_front()); void'(w_q_last.pop_front());
        if (w_cnt == aw_q_len[0]) begin
          void'(aw_q_addr.pop_front()); void'(aw_q_len.pop_front()); w_cnt = 0; b_pending++;
        end else w_cnt++;
      end
      wready <= !stall();
      if (bvalid && bready) bvalid <= 0;
      else if (!bvalid && b_pending > 0) begin bvalid <= 1; b_pending--; end
    end
  end
endmodule
