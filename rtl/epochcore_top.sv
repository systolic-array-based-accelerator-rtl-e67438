// epochcore_top: the accelerator core - controller, LIMA-PE systolic array,
// weight SRAM, input/output SRAM, activation unit and layer-normalisation unit.
//
// The host (over PCIe in the paper; plain ports here) fills the weight SRAM
// with preload columns and the I/O SRAM with input sequences, issues a command
// and waits for done. For an SSM layer (S4 or Liquid-S4, selected only by the
// FRI/TRI modes written in the weight SRAM) the controller preloads the array,
// then streams each input word u(t) from the I/O SRAM to all top-row PEs; the
// result y(t) of column 0 leaves the array ROWS cycles later, passes the
// activation unit and is written back to the I/O SRAM at out_base onward. A
// new input enters every cycle, so a sequence of T words takes T + ROWS + 2
// cycles. For GEMM the array runs output-stationary; the skewed operands come
// from the gemm_a (west, one per row) and gemm_b (north, one per column) ports
// in every cycle where gemm_step is high, and the result rows leave on gemm_res
// during readout, bottom row first. Outside gemm_step the operands into the
// array are forced to zero, so the accumulators hold their sums.
//
// With cmd_ln set, every GEMM result row goes through the layer-normalisation
// unit before it appears on gemm_res; the readout is held back (the array
// simply keeps its sums) while that unit is busy with the previous row, so a
// row takes about 2*COLS + 100 cycles instead of one. Without cmd_ln a row
// leaves every cycle.
//
// Host accesses to the SRAMs are only honoured while the core is idle.
// Default sizes: 64 x 64 array, 32-bit words, 16 MB weight and 16 MB I/O SRAM.
module epochcore_top
  import epoch_pkg::*;
#(
  parameter int unsigned ROWS     = 64,
  parameter int unsigned COLS     = 64,
  parameter int unsigned W        = 32,
  parameter int unsigned FRAC     = 16,
  parameter int unsigned IO_DEPTH = 4194304,
  parameter int unsigned WW       = ROWS * (W + 3),
  parameter int unsigned W_DEPTH  = 134217728 / WW,
  parameter int unsigned IAW      = $clog2(IO_DEPTH),
  parameter int unsigned WAW      = $clog2(W_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   start,
  input  logic                   cmd_gemm,
  input  logic                   cmd_cplx,
  input  logic [2:0]             cmd_act,
  input  logic                   cmd_ln,      // layer-normalise GEMM result rows
  input  logic [WAW-1:0]         cmd_w_base,
  input  logic [IAW-1:0]         cmd_in_base,
  input  logic [IAW-1:0]         cmd_out_base,
  input  logic [IAW-1:0]         cmd_len,
  input  logic [15:0]            cmd_n_seq,
  output logic                   busy,
  output logic                   done,
  // host access to the SRAMs
  input  logic                   host_w_we,
  input  logic [WAW-1:0]         host_w_addr,
  input  logic [WW-1:0]          host_w_wdata,
  input  logic                   host_io_we,
  input  logic [IAW-1:0]         host_io_addr,
  input  logic [W-1:0]           host_io_wdata,
  input  logic                   host_io_re,
  output logic [W-1:0]           host_io_rdata,
  // GEMM edge streams
  output logic                   gemm_step,
  input  logic [ROWS-1:0][W-1:0] gemm_a,
  input  logic [COLS-1:0][W-1:0] gemm_b,
  output logic                   gemm_res_valid,
  output logic [COLS-1:0][W-1:0] gemm_res
);
  logic sa_load, sa_clear_state, sa_clear_all, sa_readout, sa_cplx;
  logic w_rd_en, io_rd_en, in_valid, ssm_mode;
  logic [WAW-1:0] w_rd_addr;
  logic [IAW-1:0] io_rd_addr, io_wr_addr;
  logic [WW-1:0]  w_rd_data;
  logic [W-1:0]   io_rd_data;
  logic           act_valid;
  logic [W-1:0]   act_data;
  logic [ROWS-1:0] vpipe;
  logic [2:0]     act_q;
  logic           ln_q, ro_ready, ro_stall;
  logic           ln_in_ready, ln_out_valid;
  logic [COLS-1:0][W-1:0] ln_out;

  epoch_controller #(.ROWS(ROWS), .COLS(COLS), .IAW(IAW), .WAW(WAW)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .cmd_gemm(cmd_gemm), .cmd_cplx(cmd_cplx),
    .cmd_w_base(cmd_w_base), .cmd_in_base(cmd_in_base), .cmd_out_base(cmd_out_base),
    .cmd_len(cmd_len), .cmd_n_seq(cmd_n_seq), .busy(busy), .done(done),
    .sa_load(sa_load), .sa_clear_state(sa_clear_state), .sa_clear_all(sa_clear_all),
    .sa_readout(sa_readout), .sa_cplx(sa_cplx), .gemm_step(gemm_step),
    .w_rd_en(w_rd_en), .w_rd_addr(w_rd_addr), .io_rd_en(io_rd_en), .io_rd_addr(io_rd_addr),
    .in_valid(in_valid), .res_valid(act_valid), .io_wr_addr(io_wr_addr), .ssm_mode(ssm_mode),
    .ro_ready(ro_ready), .ro_stall(ro_stall));

  weight_sram #(.ROWS(ROWS), .W(W), .WW(WW), .DEPTH(W_DEPTH), .AW(WAW)) u_wsram (
    .clk(clk), .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_data),
    .wr_en(host_w_we && !busy), .wr_addr(host_w_addr), .wr_data(host_w_wdata));

  io_sram #(.W(W), .DEPTH(IO_DEPTH), .AW(IAW)) u_iosram (
    .clk(clk),
    .rd_en(busy ? io_rd_en : host_io_re), .rd_addr(busy ? io_rd_addr : host_io_addr),
    .rd_data(io_rd_data),
    .wr_en(busy ? act_valid : host_io_we), .wr_addr(busy ? io_wr_addr : host_io_addr),
    .wr_data(busy ? act_data : host_io_wdata));
  assign host_io_rdata = io_rd_data;

  // array edges
  logic [ROWS-1:0][W-1:0]      sa_stat_in;
  logic [ROWS-1:0][CTRL_W-1:0] sa_ctrl_in;
  logic [COLS-1:0][W-1:0]      sa_data_in, sa_res_in, sa_res_out;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      sa_ctrl_in[r] = w_rd_data[r*(W+3)+W +: CTRL_W];
      sa_stat_in[r] = sa_load ? w_rd_data[r*(W+3) +: W] : (gemm_step ? gemm_a[r] : '0);
    end
    for (int c = 0; c < COLS; c++) begin
      // the input word is broadcast to the whole top row (SSM)
      sa_data_in[c] = (ssm_mode && in_valid) ? io_rd_data : '0;
      sa_res_in[c]  = (!ssm_mode && gemm_step) ? gemm_b[c] : '0;
    end
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .W(W), .FRAC(FRAC)) u_sa (
    .clk(clk), .rst_n(rst_n), .load(sa_load), .clear_state(sa_clear_state),
    .clear_all(sa_clear_all), .readout(sa_readout), .cplx(sa_cplx),
    .stat_in(sa_stat_in), .ctrl_in(sa_ctrl_in), .data_in(sa_data_in), .res_in(sa_res_in),
    .res_out(sa_res_out));

  // an input entering the top row leaves the bottom ROWS cycles later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      act_q <= '0;
      ln_q  <= 1'b0;
    end else begin
      vpipe <= {vpipe[ROWS-2:0], ssm_mode && in_valid};
      if (start && !busy) begin
        act_q <= cmd_act;
        ln_q  <= cmd_ln;
      end
    end
  end

  nonlinear_act #(.W(W), .FRAC(FRAC)) u_act (
    .clk(clk), .rst_n(rst_n), .func(act_q), .in_valid(vpipe[ROWS-1]),
    .in_data(sa_res_out[0]), .out_valid(act_valid), .out_data(act_data));

  // GEMM result rows, optionally through layer normalisation
  assign ro_ready = !ln_q || ln_in_ready;

  layer_norm #(.LEN(COLS), .W(W), .FRAC(FRAC)) u_ln (
    .clk(clk), .rst_n(rst_n), .in_valid(sa_readout && ln_q), .in_ready(ln_in_ready),
    .in_vec(sa_res_out), .out_valid(ln_out_valid), .out_vec(ln_out));

  assign gemm_res_valid = ln_q ? ln_out_valid : sa_readout;
  assign gemm_res       = ln_q ? ln_out : sa_res_out;
endmodule
