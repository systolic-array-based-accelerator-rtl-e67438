// epoch_controller: controller unit of the accelerator.
//
// Takes one command from the host at a time (start + cmd, done pulses when it
// finishes) and sequences the array through the paper's phases:
//   Reset    : one cycle of clear_all (weights, modes and partial sums zeroed)
//   Pre-Load : COLS words read from the weight SRAM, one per cycle, shifted
//              into the west edge with load high
//   Compute  : SSM - for each of n_seq sequences, seq_len input words are read
//              from the I/O SRAM and broadcast to the top row, one per cycle;
//              each result leaves the array ROWS cycles later and is written
//              back after the activation unit. Between sequences the state and
//              partial sums are cleared (clear_state) while weights stay.
//              GEMM - the output-stationary (TOS) array is stepped for
//              seq_len + ROWS + COLS - 2 cycles while the host supplies skewed
//              operands at the array edges.
//   Readout  : GEMM only - ROWS readout cycles shift the result matrix out of
//              the bottom of the array, one row vector per cycle. A readout
//              cycle is held back (stall) while ro_ready is low, i.e. while the
//              layer-normalisation unit is still busy with the previous row;
//              done follows once the consumer is idle again.
// The phases follow the paper; the command format, the single-command
// handshake and all cycle bookkeeping are this design's own.
module epoch_controller
  import epoch_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64,
  parameter int unsigned IAW  = 22,   // I/O SRAM address width
  parameter int unsigned WAW  = 16    // weight SRAM address width
) (
  input  logic            clk,
  input  logic            rst_n,
  // host command
  input  logic            start,
  input  logic            cmd_gemm,     // 0: SSM layer, 1: GEMM (TOS)
  input  logic            cmd_cplx,     // complex arithmetic
  input  logic [WAW-1:0]  cmd_w_base,   // first weight SRAM word of the preload
  input  logic [IAW-1:0]  cmd_in_base,  // first input word (SSM)
  input  logic [IAW-1:0]  cmd_out_base, // first output word (SSM)
  input  logic [IAW-1:0]  cmd_len,      // SSM sequence length T / GEMM depth K
  input  logic [15:0]     cmd_n_seq,    // SSM sequences in the batch
  output logic            busy,
  output logic            done,
  // array control
  output logic            sa_load,
  output logic            sa_clear_state,
  output logic            sa_clear_all,
  output logic            sa_readout,
  output logic            sa_cplx,
  output logic            gemm_step,    // GEMM: edge operands consumed this cycle
  // weight SRAM read
  output logic            w_rd_en,
  output logic [WAW-1:0]  w_rd_addr,
  // I/O SRAM
  output logic            io_rd_en,
  output logic [IAW-1:0]  io_rd_addr,
  output logic            in_valid,     // I/O read data is an input this cycle
  input  logic            res_valid,    // activation output valid
  output logic [IAW-1:0]  io_wr_addr,
  output logic            ssm_mode,
  // readout flow control: the consumer of result rows can take one
  input  logic            ro_ready,
  output logic            ro_stall      // a readout cycle is held back
);
  typedef enum logic [3:0] {S_IDLE, S_CLR, S_PRE, S_RUN, S_DRAIN, S_SEQCLR, S_GRUN, S_GRO,
                            S_GWAIT} state_e;
  state_e         st;
  logic [IAW-1:0] cnt, ocnt;
  logic [15:0]    seq;
  logic           gemm_q, cplx_q, pre_v;
  logic [WAW-1:0] w_base_q;
  logic [IAW-1:0] in_ptr, out_ptr, len_q;
  logic [15:0]    nseq_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; ocnt <= '0; seq <= '0; gemm_q <= 1'b0; cplx_q <= 1'b0;
      pre_v <= 1'b0; w_base_q <= '0; in_ptr <= '0; out_ptr <= '0; len_q <= '0;
      nseq_q <= '0; done <= 1'b0; in_valid <= 1'b0;
    end else begin
      done     <= 1'b0;
      pre_v    <= (st == S_PRE) && (cnt < IAW'(COLS));
      in_valid <= io_rd_en;
      if (res_valid) begin
        ocnt    <= ocnt + 1'b1;
        out_ptr <= out_ptr + 1'b1;
      end
      unique case (st)
        S_IDLE: if (start) begin
          gemm_q <= cmd_gemm; cplx_q <= cmd_cplx; w_base_q <= cmd_w_base;
          in_ptr <= cmd_in_base; out_ptr <= cmd_out_base; len_q <= cmd_len;
          nseq_q <= cmd_n_seq; seq <= '0; cnt <= '0; ocnt <= '0;
          st <= S_CLR;
        end
        S_CLR: begin cnt <= '0; st <= S_PRE; end
        S_PRE: begin
          cnt <= cnt + 1'b1;
          if (cnt == IAW'(COLS)) begin
            cnt <= '0;
            st  <= gemm_q ? S_GRUN : S_RUN;
          end
        end
        S_RUN: begin
          cnt    <= cnt + 1'b1;
          in_ptr <= in_ptr + 1'b1;
          if (cnt == len_q - 1'b1) begin cnt <= '0; st <= S_DRAIN; end
        end
        S_DRAIN: if (ocnt == len_q) begin
          ocnt <= '0;
          seq  <= seq + 1'b1;
          st   <= S_SEQCLR;
        end
        S_SEQCLR: begin
          if (seq == nseq_q) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_RUN;
        end
        S_GRUN: begin
          cnt <= cnt + 1'b1;
          if (cnt == len_q + IAW'(ROWS + COLS - 3)) begin cnt <= '0; st <= S_GRO; end
        end
        S_GRO: if (ro_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == IAW'(ROWS - 1)) begin cnt <= '0; st <= S_GWAIT; end
        end
        S_GWAIT: if (ro_ready) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy           = (st != S_IDLE);
    sa_clear_all   = (st == S_CLR);
    sa_clear_state = (st == S_SEQCLR);
    sa_load        = pre_v;
    sa_readout     = (st == S_GRO) && ro_ready;
    ro_stall       = (st == S_GRO) && !ro_ready;
    sa_cplx        = cplx_q;
    gemm_step      = (st == S_GRUN);
    w_rd_en        = (st == S_PRE) && (cnt < IAW'(COLS));
    w_rd_addr      = w_base_q + WAW'(cnt);
    io_rd_en       = (st == S_RUN);
    io_rd_addr     = in_ptr;
    io_wr_addr     = out_ptr;
    ssm_mode       = !gemm_q;
  end

  // the Load and Compute phases never overlap with a GEMM step or an input
  a_load_excl: assert property (@(posedge clk) disable iff (!rst_n) !(sa_load && (io_rd_en || gemm_step)));
endmodule
