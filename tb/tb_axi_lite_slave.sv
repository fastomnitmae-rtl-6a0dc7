// tb_axi_lite_slave: writes every configuration register over AXI-Lite (with
// address and data phases in either order), reads them back, checks the cfg
// outputs, the start and clear pulses (one cycle each), byte strobes, and the
// read-only status and counter registers.
`timescale 1ns/1ps
module tb_axi_lite_slave;
  import tmae_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  cfg_t        cfg;
  logic        start_pulse, clear_pulse;
  stat_t       stat;
  int checks = 0, failures = 0;
  int n_start = 0, n_clear = 0;

  axi_lite_slave #(.AXIL_ADDR_W(8)) dut (
    .clk, .rst_n, .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg, .start_pulse, .clear_pulse, .stat);

  always @(posedge clk) begin
    if (rst_n && start_pulse) n_start++;
    if (rst_n && clear_pulse) n_clear++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // order 0: address and data together, 1: address first, 2: data first
  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF, input int order = 0);
    @(negedge clk);
    fork
      begin
        if (order == 2) repeat (2) @(negedge clk);
        awaddr = a; awvalid = 1;
        do @(posedge clk); while (!awready);
        #1 awvalid = 0;
      end
      begin
        if (order == 1) repeat (2) @(negedge clk);
        wdata = d; wstrb = s; wvalid = 1;
        do @(posedge clk); while (!wready);
        #1 wvalid = 0;
      end
    join
    while (!bvalid) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    #1 arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [7:0] regs [11];
    logic [31:0] vals [11];
    awaddr = 0; awvalid = 0; wdata = 0; wstrb = 0; wvalid = 0; bready = 1; araddr = 0; arvalid = 0; rready = 1;
    stat = '0;
    regs = '{REG_DATA_BASE, REG_STATE_BASE, REG_WEIGHT_BASE, REG_RESULT_BASE, REG_NUM_EX, REG_BATCH,
             REG_CLAUSES, REG_T, REG_S_INV, REG_EPOCHS, REG_SEED};
    vals = '{32'h1000_0000, 32'h2000_0040, 32'h3000_0080, 32'h4000_00C0, 32'd352000, 32'd8,
             32'd32, 32'd20000, 32'd65536, 32'd4, 32'd42};
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(REG_BATCH, d);   check(d == 1, "batch size resets to 1");
    rd(REG_S_INV, d);   check(d == 65536, "1/s resets to 1.0");
    for (int i = 0; i < 11; i++) wr(regs[i], vals[i], 4'hF, i % 3);
    for (int i = 0; i < 11; i++) begin
      rd(regs[i], d);
      check(d == vals[i], $sformatf("readback of register %02h: %h", regs[i], d));
    end
    check(cfg.data_base == 32'h1000_0000 && cfg.state_base == 32'h2000_0040 && cfg.weight_base == 32'h3000_0080 &&
          cfg.result_base == 32'h4000_00C0, "address outputs");
    check(cfg.num_examples == 352000 && cfg.batch_size == 8 && cfg.num_clauses == 32, "size outputs");
    check(cfg.t_thresh == 20000 && cfg.s_inv == 17'h10000 && cfg.epochs == 4 && cfg.seed == 42, "hyperparameter outputs");
    wr(REG_SEED, 32'hAABB_CCDD, 4'b0010);
    check(cfg.seed == 32'h0000_CC2A, "byte strobes");
    check(n_start == 0 && n_clear == 0, "no control pulse before CTRL write");
    wr(REG_CTRL, 32'h1);
    repeat (3) @(negedge clk);
    check(n_start == 1, "one start pulse");
    wr(REG_CTRL, 32'h2);
    repeat (3) @(negedge clk);
    check(n_clear == 1 && n_start == 1, "one clear pulse");
    stat = '{busy: 1'b1, done: 1'b0, examples_done: 32'd17, clause_updates: 32'd99, passes_skipped: 32'd5, cycles: 32'd1234};
    rd(REG_STATUS, d);  check(d == 32'h1, "STATUS busy");
    stat.busy = 0; stat.done = 1;
    rd(REG_STATUS, d);  check(d == 32'h2, "STATUS done");
    rd(REG_EX_DONE, d); check(d == 17, "examples counter");
    rd(REG_UPDATES, d); check(d == 99, "update counter");
    rd(REG_SKIPPED, d); check(d == 5, "skipped counter");
    rd(REG_CYCLES, d);  check(d == 1234, "cycle counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
