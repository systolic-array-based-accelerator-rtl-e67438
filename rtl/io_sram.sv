// io_sram: on-chip input/output SRAM buffer.
//
// One memory holds both the input sequences read into the array and the
// output sequences written back from it (the paper's input and output SRAM
// buffers share one 16 MB unit). It has one synchronous read port and one
// write port, so one input word can be streamed in and one result word
// streamed out in the same cycle. Read data appears the cycle after rd_en.
// The default 16 MB of 32-bit words follows the paper; the port arrangement
// and read latency are this design's choices. Written as an array so that a
// memory compiler macro can replace it.
module io_sram #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4194304,           // 16 MB of 32-bit words
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
