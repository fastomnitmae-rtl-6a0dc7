// label_fifo: FIFO of the binary labels Y of the examples of the current batch.
//
// The data mover pushes one label per fetched example; the head (`head`) is the
// label of the example being trained and is popped when that example is done.
// `flush` empties it. Push and pop may happen in the same cycle. Pushing when
// full or popping when empty is a protocol error (asserted). Registers only.
module label_fifo #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  input  logic        push,
  input  logic        din,
  input  logic        pop,
  output logic        head,
  output logic        empty,
  output logic        full,
  output logic [AW:0] count
);
  logic [DEPTH-1:0] mem;
  logic [AW-1:0]    rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign head  = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem    <= '0;
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= din;
        wr_ptr      <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
