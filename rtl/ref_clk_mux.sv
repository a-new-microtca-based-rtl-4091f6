// ref_clk_mux: reference clock selection in front of the clock synthesizer.
//
// The experiment's 40 MHz reference clock normally arrives over the backplane
// from the AMC13; for stand-alone use it can instead come from a front-panel
// SMA connector. A 2:1 multiplexer, whose select line is driven by the
// controller FPGA, picks one of the two and feeds the on-board clock
// synthesizer. On the board this is a discrete part; here it is a plain
// combinational multiplexer (sel = 0: backplane, sel = 1: front panel, an
// encoding chosen by this design). No glitch-free switching is attempted: the
// synthesizer PLL is expected to relock after a change.
module ref_clk_mux (
  input  logic bp_refclk,
  input  logic fp_refclk,
  input  logic sel,
  output logic refclk_out
);

  always_comb refclk_out = sel ? fp_refclk : bp_refclk;

endmodule
