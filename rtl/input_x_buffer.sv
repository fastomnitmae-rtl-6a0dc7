// input_x_buffer: on-chip store of the X bit vectors of one batch.
//
// Written beat by beat by the data mover while a batch is fetched (example b
// occupies beats b*ceil(F/DATA_W) onward), and read by the compute core with a
// word address. The read is synchronous with a read enable, as in a block RAM:
// rd_data shows the beat at rd_addr one cycle after a cycle with rd_en high and
// holds otherwise. The paper calls this buffer the input FIFO; it is read
// by address here because every clause pass reads the example again.
module input_x_buffer #(
  parameter int unsigned DATA_W = 128,
  parameter int unsigned DEPTH  = 2504,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [DATA_W-1:0] rd_data
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
