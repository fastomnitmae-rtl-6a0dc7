// tb_weights_buffer: loads 32 signed weights as 8 beats of four, then reads
// them through all 12 read ports at random clause indices.
`timescale 1ns/1ps
module tb_weights_buffer;
  localparam int unsigned MAXC = 32, NRD = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [2:0] wr_beat;
  logic [127:0] wr_data;
  logic [5:0] rd_idx [NRD];
  logic signed [31:0] rd_data [NRD];
  int w [MAXC];
  int checks = 0, failures = 0;

  weights_buffer #(.MAX_CLAUSES(MAXC), .W_W(32), .DATA_W(128), .NRD(NRD)) dut (.clk, .rst_n, .wr_en, .wr_beat, .wr_data, .rd_idx, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_beat = 0; wr_data = 0;
    foreach (rd_idx[r]) rd_idx[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (w[i]) w[i] = int'($urandom % 200001) - 100000;
    for (int b = 0; b < MAXC / 4; b++) begin
      @(negedge clk);
      wr_en = 1; wr_beat = 3'(b);
      for (int k = 0; k < 4; k++) wr_data[k*32 +: 32] = w[b*4 + k];
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      foreach (rd_idx[r]) rd_idx[r] = 6'($urandom % MAXC);
      #1;
      foreach (rd_idx[r]) begin
        checks++;
        if (rd_data[r] !== w[rd_idx[r]]) begin failures++; if (failures < 5) $display("FAIL idx %0d", rd_idx[r]); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
