// lima_stat_buf: stationary and control buffer of the LIMA-PE.
//
// Two registers: the W-bit stationary operand (a weight or recurrence
// coefficient) and the 3-bit control word that selects the PE's mode. Both are
// written by the Load clock (load_en) and their outputs also drive the
// Stationary Out / Control Out ports, so the PEs of one row form a west-to-east
// shift chain: a value entering the west edge reaches column c after c+1 load
// cycles. clear_all (Reset phase) zeroes both registers, which leaves the PE
// in pass-through mode.
//
// In TOS (output-stationary) mode nothing is stationary, and the same
// stationary register is reused, on the Compute clock, as the pipeline
// register that moves the GEMM input operand one PE east per cycle; the
// control word is kept. This reuse is this design's choice: the paper shows
// the operand entering on Stationary In but not how it is passed on.
module lima_stat_buf
  import epoch_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear_all,
  input  logic              load_en,
  input  logic              comp_en,
  input  logic [W-1:0]      stat_in,
  input  logic [CTRL_W-1:0] ctrl_in,
  output logic [W-1:0]      stat_q,
  output logic [CTRL_W-1:0] ctrl_q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_q <= '0;
      ctrl_q <= '0;
    end else if (clear_all) begin
      stat_q <= '0;
      ctrl_q <= '0;
    end else if (load_en) begin
      stat_q <= stat_in;
      ctrl_q <= ctrl_in;
    end else if (comp_en && ctrl_q == MODE_TOS) begin
      stat_q <= stat_in;
    end
  end
endmodule
