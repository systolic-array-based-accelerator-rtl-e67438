// lima_compute: compute unit of the LIMA-PE (multiplexers M1-M7, unified
// multiplier with rescale, accumulator adder, partial-sum register).
//
// One multiply-add per Compute cycle; the operand routing per mode is
//   FRI : psum <= Am + Bs*psum         (M1 picks psum, M3 picks Bs)
//   TRI : psum <= Am + (Bs+Am)*psum    (M7 adds Am to Bs before M3)
//   BWS : psum <= Am + Bs*Cm           (Cm = Data In, Am = Result In)
//   TOS : psum <= psum + Bm*Cm         (Bm = Stationary In, Cm = Result In)
// where Am is Result In, Bs the stationary buffer. Outputs:
//   Data Out   (M5): psum in FRI/TRI, otherwise Data In delayed one cycle
//   Result Out (M6): psum in BWS and during TOS readout, otherwise Result In
//                    delayed one cycle
// A sleeping PE drives zeros and updates nothing. During readout a TOS PE
// passes its psum south and takes the psum of the PE above, so a column of
// results leaves the bottom of the array over ROWS cycles.
//
// Mode semantics and mux names follow the paper's Figure 6 and equations.
// The one-cycle forwarding registers on the pass paths, the TOS readout shift
// and the zero outputs in sleep are this design's choices; they make every
// PE-to-PE hop take exactly one cycle, which reproduces the paper's N+2 cycle
// latency of the SSM mapping.
module lima_compute
  import epoch_pkg::*;
#(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              comp_en,      // Compute clock enable
  input  logic              clear_state,  // clear psum and forwarding registers
  input  logic              readout,      // TOS result readout phase
  input  logic              cplx,
  input  logic [CTRL_W-1:0] mode,
  input  logic [W-1:0]      stat_buf,     // Bs
  input  logic [W-1:0]      stat_in,      // Bm (moving operand, TOS)
  input  logic [W-1:0]      data_in,
  input  logic [W-1:0]      res_in,
  output logic [W-1:0]      data_out,
  output logic [W-1:0]      res_out
);
  localparam int unsigned H = W / 2;

  logic [W-1:0] psum_q, fwd_dat_q, fwd_res_q;
  logic [W-1:0] m1, m2, m3, m4, m7, prod, sum;
  logic is_fri, is_tri, is_bws, is_tos, is_sleep;

  function automatic logic [W-1:0] fx_add(input logic [W-1:0] x, input logic [W-1:0] y,
                                          input logic c);
    logic [H-1:0] lo, hi;
    lo = x[H-1:0] + y[H-1:0];
    hi = x[W-1:H] + y[W-1:H];
    return c ? {hi, lo} : x + y;
  endfunction

  always_comb begin
    is_fri   = (mode == MODE_FRI);
    is_tri   = (mode == MODE_TRI);
    is_bws   = (mode == MODE_BWS);
    is_tos   = (mode == MODE_TOS);
    is_sleep = (mode == MODE_SLEEP);
    m1 = (is_fri || is_tri) ? psum_q : data_in;
    m2 = is_tos ? stat_in : m1;
    m7 = is_tri ? fx_add(stat_buf, res_in, cplx) : stat_buf;
    m3 = is_tos ? res_in : m7;
    m4 = is_tos ? psum_q : res_in;
  end

  lima_mul #(.W(W), .FRAC(FRAC)) u_mul (.a(m2), .b(m3), .cplx(cplx), .p(prod));

  assign sum = fx_add(prod, m4, cplx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_q    <= '0;
      fwd_dat_q <= '0;
      fwd_res_q <= '0;
    end else if (clear_state) begin
      psum_q    <= '0;
      fwd_dat_q <= '0;
      fwd_res_q <= '0;
    end else if (comp_en) begin
      fwd_dat_q <= data_in;
      fwd_res_q <= res_in;
      if (is_tos && readout)                      psum_q <= res_in;
      else if (is_fri || is_tri || is_bws || is_tos) psum_q <= sum;
    end
  end

  always_comb begin
    if (is_sleep) begin
      data_out = '0;
      res_out  = '0;
    end else begin
      data_out = (is_fri || is_tri) ? psum_q : fwd_dat_q;
      res_out  = (is_bws || (is_tos && readout)) ? psum_q : fwd_res_q;
    end
  end
endmodule
