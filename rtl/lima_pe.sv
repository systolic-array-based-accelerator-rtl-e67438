// lima_pe: LIMA-PE, the reconfigurable processing element of the array.
//
// A PE holds a stationary operand and a 3-bit mode in its stationary and
// control buffer, and a partial sum in its compute unit. Its ports follow the
// paper's Figure 5: Stationary & Control In from the west and Out to the east
// (the preload chain), Result In from the north and Out to the south, Data In
// from the north-east and Data Out to the south-west (the diagonal used by the
// SSM dataflow). The mode selects one of the FRI, TRI, BWS and TOS multiply-
// accumulates, pass-through or sleep (see lima_compute). The complex bit
// switches all arithmetic between one W-bit real and one {re,im} complex word.
//
// Timing: while load is high the buffer shifts one word per cycle and no MAC
// happens; while load is low the compute unit updates once per cycle unless the
// PE sleeps. All outputs are registered, so every hop between PEs is one cycle.
// The clock controller is realised with clock enables (see lima_clk_ctrl).
module lima_pe
  import epoch_pkg::*;
#(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic              clear_state,
  input  logic              clear_all,
  input  logic              readout,
  input  logic              cplx,
  input  logic [W-1:0]      stat_in,
  input  logic [CTRL_W-1:0] ctrl_in,
  output logic [W-1:0]      stat_out,
  output logic [CTRL_W-1:0] ctrl_out,
  input  logic [W-1:0]      data_in,
  output logic [W-1:0]      data_out,
  input  logic [W-1:0]      res_in,
  output logic [W-1:0]      res_out
);
  logic load_en, comp_en, sleep;
  logic [W-1:0]      stat_q;
  logic [CTRL_W-1:0] ctrl_q;

  lima_clk_ctrl u_clk (.load(load), .ctrl_q(ctrl_q), .load_en(load_en), .comp_en(comp_en),
                       .sleep(sleep));

  lima_stat_buf #(.W(W)) u_buf (
    .clk(clk), .rst_n(rst_n), .clear_all(clear_all), .load_en(load_en), .comp_en(comp_en),
    .stat_in(stat_in), .ctrl_in(ctrl_in), .stat_q(stat_q), .ctrl_q(ctrl_q));

  lima_compute #(.W(W), .FRAC(FRAC)) u_cu (
    .clk(clk), .rst_n(rst_n), .comp_en(comp_en), .clear_state(clear_state || clear_all),
    .readout(readout), .cplx(cplx), .mode(ctrl_q), .stat_buf(stat_q), .stat_in(stat_in),
    .data_in(data_in), .res_in(res_in), .data_out(data_out), .res_out(res_out));

  assign stat_out = stat_q;
  assign ctrl_out = ctrl_q;

  // no MAC may happen while the Load clock runs
  property p_excl; @(posedge clk) disable iff (!rst_n) !(load_en && comp_en); endproperty
  assert property (p_excl);
endmodule
