// epoch_pkg: shared types and arithmetic for the SSM systolic accelerator.
//
// Every processing element (LIMA-PE) works on W-bit fixed-point words. A word is
// either one real number (two's complement, FRAC fraction bits) or one complex
// number whose real part sits in the upper W/2 bits and imaginary part in the
// lower W/2 bits (each two's complement, FRAC/2 fraction bits). Which of the
// two applies is selected by a single array-wide "complex" bit. The word width
// and fraction bits are module parameters (defaults 32 and 16).
//
// The operating mode of a PE is held in a 3-bit control word. The meaning of
// the modes follows the paper (FRI, TRI, BWS, TOS MAC operations, pass-through
// and sleep); the binary encoding below is this design's own choice.
package epoch_pkg;

  localparam int unsigned CTRL_W = 3;   // control bits per PE

  typedef enum logic [CTRL_W-1:0] {
    MODE_PASS  = 3'b000,  // pass-through: Data In -> Data Out, Result In -> Result Out
    MODE_BWS   = 3'b001,  // banded WS MAC:       Ym = Am + Bs*Cm  (Cm from Data In)
    MODE_FRI   = 3'b010,  // fixed recurrent:     Ys = Am + Bs*Ys
    MODE_TRI   = 3'b011,  // time-varying recur.: Ys = Am + (Bs+Am)*Ys
    MODE_TOS   = 3'b100,  // traditional OS MAC:  Ys = Ys + Bm*Cm
    MODE_RSV5  = 3'b101,  // reserved, behaves as pass-through
    MODE_RSV6  = 3'b110,  // reserved, behaves as pass-through
    MODE_SLEEP = 3'b111   // sleep: no MAC, no data transfer
  } pe_mode_e;

endpackage
