// weight_sram: on-chip weight and control SRAM.
//
// Each word is one column of preload data for the whole array: for every row r
// a {control[2:0], stationary[W-1:0]} pair at bits r*(W+3) upward. During the
// Pre-Load phase one word per cycle is shifted into the west edge of the
// array. Because the words shift eastward, the word read first ends up in the
// last column. The 16 MB capacity and the storing of control bits together with
// the weights follow the paper; the word organisation (one array column per
// word), the host write port and the one-cycle read latency are this design's
// choices.
module weight_sram #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned W     = 32,
  parameter int unsigned WW    = ROWS * (W + 3),
  parameter int unsigned DEPTH = 134217728 / WW,   // 16 MB
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [WW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [WW-1:0] wr_data
);
  logic [WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
