// tb_label_fifo: random pushes and pops (never beyond full or empty) and
// flushes, compared with a queue; checks head, empty, full and count.
`timescale 1ns/1ps
module tb_label_fifo;
  localparam int unsigned DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, push, din, pop, head, empty, full;
  logic [3:0] count;
  bit q[$];
  int checks = 0, failures = 0;

  label_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .flush, .push, .din, .pop, .head, .empty, .full, .count);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; push = 0; din = 0; pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (count !== 4'(q.size()) || empty !== (q.size() == 0) || full !== (q.size() == DEPTH) ||
          (q.size() > 0 && head !== q[0])) begin
        failures++;
        if (failures < 5) $display("FAIL n=%0d count=%0d/%0d head=%0d", n, count, q.size(), head);
      end
      flush = ($urandom % 97) == 0;
      push  = !flush && (q.size() < DEPTH) && ($urandom % 2);
      pop   = !flush && (q.size() > 0) && ($urandom % 2);
      din   = $urandom % 2;
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
