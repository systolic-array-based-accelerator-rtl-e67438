// systolic_array: ROWS x COLS grid of LIMA-PEs with the ProDF interconnect.
//
// Three fixed nearest-neighbour links join the PEs and never change:
//   west -> east   Stationary & Control chain (preload; TOS input operand)
//   north -> south Result chain (partial sums; TOS weight operand and readout)
//   north-east -> south-west  Data diagonal: PE(r,c) takes Data Out of
//                 PE(r-1,c+1)
// What flows where is decided only by the mode each PE holds, which is the
// idea of the programmable dataflow: an S4 layer is mapped by giving row 0
// BWS PEs (B*u), row 1 FRI or TRI PEs (the state recurrence) and the rows
// below BWS / pass-through / sleep PEs that form C*x along the diagonal.
//
// Edges: row r's west inputs are stat_in[r]/ctrl_in[r]; column c's north
// Result input is res_in[c] and its north Data input (diagonal entry of row 0)
// is data_in[c]; the east-edge Data inputs of rows 1.. are tied to zero.
// res_out[c] is the Result Out of the bottom PE of column c. load, clear_*,
// readout and cplx reach every PE in the same cycle. The grid size defaults to
// the 64 x 64 array of the paper's evaluation.
module systolic_array
  import epoch_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64,
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic                         clear_state,
  input  logic                         clear_all,
  input  logic                         readout,
  input  logic                         cplx,
  input  logic [ROWS-1:0][W-1:0]       stat_in,
  input  logic [ROWS-1:0][CTRL_W-1:0]  ctrl_in,
  input  logic [COLS-1:0][W-1:0]       data_in,
  input  logic [COLS-1:0][W-1:0]       res_in,
  output logic [COLS-1:0][W-1:0]       res_out
);
  // link arrays; index [r][c] is the output of PE(r,c)
  logic [ROWS-1:0][COLS-1:0][W-1:0]      stat_l, dat_l, res_l;
  logic [ROWS-1:0][COLS-1:0][CTRL_W-1:0] ctrl_l;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic [W-1:0]      s_in, d_in, r_in;
      logic [CTRL_W-1:0] c_in;
      if (c == 0) begin : g_w
        assign s_in = stat_in[r];
        assign c_in = ctrl_in[r];
      end else begin : g_i
        assign s_in = stat_l[r][c-1];
        assign c_in = ctrl_l[r][c-1];
      end
      if (r == 0) begin : g_n
        assign r_in = res_in[c];
        assign d_in = data_in[c];
      end else begin : g_m
        assign r_in = res_l[r-1][c];
        if (c == COLS-1) begin : g_e
          assign d_in = '0;
        end else begin : g_d
          assign d_in = dat_l[r-1][c+1];
        end
      end
      lima_pe #(.W(W), .FRAC(FRAC)) u_pe (
        .clk(clk), .rst_n(rst_n), .load(load), .clear_state(clear_state),
        .clear_all(clear_all), .readout(readout), .cplx(cplx),
        .stat_in(s_in), .ctrl_in(c_in), .stat_out(stat_l[r][c]), .ctrl_out(ctrl_l[r][c]),
        .data_in(d_in), .data_out(dat_l[r][c]), .res_in(r_in), .res_out(res_l[r][c]));
    end
  end

  assign res_out = res_l[ROWS-1];
endmodule
