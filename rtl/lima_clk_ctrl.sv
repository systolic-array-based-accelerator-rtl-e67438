// lima_clk_ctrl: per-PE clock controller of the LIMA-PE.
//
// The PE has two mutually exclusive internal clocks: a Load clock for the
// Pre-Load phase (it writes the stationary and control buffer) and a Compute
// clock for the Compute phase (it writes the partial-sum and forwarding
// registers). A PE whose buffered control word codes Sleep gets no Compute
// clock. Here the two gated clocks are expressed as clock enables of the one
// array clock, which is logically the same and keeps the design free of
// derived clocks; an implementation may map the enables onto clock-gating
// cells.
//
// Departure, for a working preload chain: the Load enable is not suppressed
// by Sleep. The preload shifts control words from PE to PE along a row, so a
// PE that froze as soon as a Sleep code passed through it would block the
// words meant for the PEs east of it. Sleep therefore removes the Compute
// clock only; during the Compute phase the Load clock is off anyway, so a
// sleeping PE then has both clocks off as the paper states. Combinational.
module lima_clk_ctrl
  import epoch_pkg::*;
(
  input  logic              load,      // Pre-Load phase (from the controller)
  input  logic [CTRL_W-1:0] ctrl_q,    // buffered control word of this PE
  output logic              load_en,   // "Load Clk" enable
  output logic              comp_en,   // "Compute Clk" enable
  output logic              sleep      // this PE is asleep
);
  always_comb begin
    sleep   = (ctrl_q == MODE_SLEEP);
    load_en = load;
    comp_en = !load && !sleep;
  end
endmodule
