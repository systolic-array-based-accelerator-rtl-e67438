// lima_mul: unified real/complex fixed-point multiplier of the LIMA-PE, with
// the rescale stage that brings the double-width product back to W bits.
//
// Each operand is split into a high half (H = W/2 bits) and a low half. Four
// half-width partial products are formed once and reused for both formats:
//   real    : a*b = aH*bH<<W + (aH*bL + aL*bH)<<H + aL*bL   (low halves unsigned)
//   complex : re  = aH*bH - aL*bL,  im = aH*bL + aL*bH       (all halves signed)
// In real mode the 2W-bit product is shifted right by FRAC and cut to W bits;
// in complex mode each part is shifted by FRAC/2 and cut to H bits. The
// sharing of sub-products between the two formats follows the paper's
// description of the multiplication unit; the split into exactly four
// half-width products, truncating rescale and wrap-around are this design's
// choices. Purely combinational.
module lima_mul #(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cplx,   // 1: operands are {re, im} half-width complex
  output logic [W-1:0] p
);
  localparam int unsigned H = W / 2;

  logic signed [H:0]     a_hi, a_lo, b_hi, b_lo;
  logic signed [2*H+1:0] p_hh, p_hl, p_lh, p_ll;
  logic signed [2*W+3:0] real_full;
  logic signed [2*H+3:0] cre_full, cim_full;
  logic signed [2*W+3:0] real_sh;
  logic signed [2*H+3:0] cre_sh, cim_sh;

  always_comb begin
    a_hi = {a[W-1], a[W-1:H]};
    b_hi = {b[W-1], b[W-1:H]};
    a_lo = {cplx & a[H-1], a[H-1:0]};
    b_lo = {cplx & b[H-1], b[H-1:0]};
    p_hh = a_hi * b_hi;
    p_hl = a_hi * b_lo;
    p_lh = a_lo * b_hi;
    p_ll = a_lo * b_lo;
    // real: recombine the partial products into the full product
    real_full = ((2*W+4)'(p_hh) <<< W) + (((2*W+4)'(p_hl) + (2*W+4)'(p_lh)) <<< H)
              + (2*W+4)'(p_ll);
    real_sh   = real_full >>> FRAC;
    // complex: (aH + j aL)(bH + j bL)
    cre_full  = (2*H+4)'(p_hh) - (2*H+4)'(p_ll);
    cim_full  = (2*H+4)'(p_hl) + (2*H+4)'(p_lh);
    cre_sh    = cre_full >>> (FRAC/2);
    cim_sh    = cim_full >>> (FRAC/2);
    p = cplx ? {cre_sh[H-1:0], cim_sh[H-1:0]} : real_sh[W-1:0];
  end
endmodule
