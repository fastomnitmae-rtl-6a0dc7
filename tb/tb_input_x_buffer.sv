// tb_input_x_buffer: fills the buffer with random beats, reads random addresses
// and checks the one-cycle read latency and that the output holds while
// rd_en is low.
`timescale 1ns/1ps
module tb_input_x_buffer;
  localparam int unsigned DW = 128, DEPTH = 2504, AW = 12;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [DW-1:0] wr_data, rd_data, model [DEPTH];
  int checks = 0, failures = 0;

  input_x_buffer #(.DATA_W(DW), .DEPTH(DEPTH), .AW(AW)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 4000; n++) begin
      logic [DW-1:0] held;
      int a;
      a = $urandom % DEPTH;
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin failures++; if (failures < 5) $display("FAIL read %0d", a); end
      held = rd_data;
      rd_en = 0; rd_addr = AW'($urandom % DEPTH);
      @(negedge clk);
      checks++;
      if (rd_data !== held) begin failures++; if (failures < 5) $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
